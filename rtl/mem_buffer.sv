// mem_buffer -- MASTER's 128-byte line buffer between tiles.
//
// Data moves between tiles one line (one 1024-bit row) at a time: a memory
// READ instruction copies a row of the addressed tile into this buffer, and a
// later WRITE instruction copies the buffer into a row of another tile. The
// sensor's input buffer has a tile address of its own, so input data enters
// MASTER the same way: READ from the sensor address, WRITE to a data tile.
// The buffer is as wide as a tile row, as the paper states. The paper does
// not say whether it is volatile; it is built here as non-volatile storage
// (no reset), since MASTER is described as holding no volatile data, and a
// READ/WRITE pair interrupted between the two must not lose the line.
//
// Timing: a tile READ returns its row with a one-cycle rd_valid pulse, which
// the buffer captures on the next edge. For a READ of TILE_SENSOR the buffer
// itself requests the row from the sensor (sensor_rd_en, one cycle after the
// command strobe) and captures sensor_rd_data one cycle after that.
//
// Lint note: rst_n is also used by the assertion's `disable iff`, which lint
// reports as a synchronous use of an asynchronous reset (SYNCASYNCNET). The
// assertion is not logic; the warning stands for that reason.
module mem_buffer
  import master_pkg::*;
#(
  parameter int unsigned N_TILES = 240,
  parameter int unsigned COLS    = 1024
) (
  input  logic                clk,
  input  logic                rst_n,
  input  cmd_t                cmd,
  input  logic [N_TILES-1:0]  tile_rd_valid,
  input  logic [COLS-1:0]     tile_rd_data [N_TILES],
  output logic                sensor_rd_en,
  output logic [ADDR_W-1:0]   sensor_rd_row,
  input  logic [COLS-1:0]     sensor_rd_data,
  output logic [COLS-1:0]     line
);

  logic [COLS-1:0] store;      // non-volatile line
  logic            sens_wait;  // sensor row requested last cycle (volatile)
  logic [COLS-1:0] tile_sel;

  // One-hot select of the tile that answered (only one tile answers a READ).
  always_comb begin
    tile_sel = '0;
    for (int t = 0; t < N_TILES; t++)
      if (tile_rd_valid[t]) tile_sel = tile_sel | tile_rd_data[t];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sensor_rd_en  <= 1'b0;
      sensor_rd_row <= '0;
      sens_wait     <= 1'b0;
    end else begin
      sensor_rd_en <= cmd.valid && cmd.op == OP_READ && cmd.tile == TILE_SENSOR;
      if (cmd.valid && cmd.op == OP_READ && cmd.tile == TILE_SENSOR)
        sensor_rd_row <= cmd.addr[0];
      sens_wait <= sensor_rd_en;
    end
  end

  // tile_rd_valid and sens_wait are held low in reset, so the store needs
  // no reset term of its own.
  always_ff @(posedge clk) begin
    if (|tile_rd_valid) store <= tile_sel;
    else if (sens_wait) store <= sensor_rd_data;
  end

  assign line = store;

  // A READ is answered by at most one tile.
  a_one_reader: assert property (@(posedge clk) disable iff (!rst_n)
                                 $onehot0(tile_rd_valid));

endmodule
