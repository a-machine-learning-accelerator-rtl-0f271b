// master_top -- MASTER: an SVM inference accelerator built in spintronic
// processing-in-memory for energy-harvesting systems.
//
// The chip is an array of CRAM tiles plus five small parts: the memory
// controller, a 128-byte line buffer, the non-volatile program counter, a
// non-volatile register holding the last Activate Columns instruction, and
// voltage sensing. N_INSTR_TILES tiles hold the program, N_DATA_TILES tiles
// hold the data and do all the computing, column-parallel, inside the array.
// The controller fetches an instruction, broadcasts it to the data tiles,
// waits, and commits the next PC; data tiles have tile addresses
// 0..N_DATA_TILES-1, the sensor's input buffer has TILE_SENSOR and
// TILE_BCAST addresses all data tiles at once.
//
// Power: vdd_mv is the harvested supply. While it is below the voltage
// monitor's threshold, every volatile flip-flop (controller sequencer, tile
// command state, column latches) is held in reset; the arrays, the line
// buffer, the PC copies, the parity bit and the Activate Columns register are
// non-volatile and keep their contents. On power-up the controller restores
// the active columns and resumes at the valid PC.
//
// Before deployment (host_mode = 1) the host port loads whole rows into
// instruction tiles (host_instr = 1, host_tile = instruction tile index) or
// data tiles (host_instr = 0, host_tile = tile address), and reads them back
// with one cycle latency; `init` sets the PC to 0 and clears the stored
// Activate Columns instruction. idle_cycles, prog_len, res_tile and res_row
// are system settings (this design's choice of interface).
//
// Defaults follow the paper: 1024 x 1024 tiles (128 KB), 9-bit tile
// addresses, STT cells, and the paper's largest configuration, the one that
// holds its largest program (MNIST): 4.5 MB of instructions = 36 tiles and
// 30 MB of data = 240 tiles, 34.5 MB in all.
//
// Lint notes: the instruction tiles are full cram_tile instances whose
// command-side outputs (busy, rd_valid, rd_data, par_err, act_cols) are
// left unused, since instructions are only ever fetched through port B; the
// stored Activate Columns instruction (act_instr) is used inside the
// controller only. Both unused-signal warnings are expected. por_n is also
// reported as used synchronously: that use is the `disable iff` of the
// assertions in mem_buffer and mem_controller, not logic.
module master_top
  import master_pkg::*;
#(
  parameter int unsigned N_DATA_TILES  = 240,
  parameter int unsigned N_INSTR_TILES = 36,
  parameter int unsigned ROWS          = 1024,
  parameter int unsigned COLS          = 1024,
  parameter bit          SHE           = 1'b0,
  parameter int unsigned NV_WR_CYCLES  = 2,
  parameter int unsigned V_ON_MV       = 1000,
  parameter int unsigned V_OFF_MV      = 900,
  parameter int unsigned PC_W          = $clog2(N_INSTR_TILES * ROWS * (COLS / INSTR_W))
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [15:0]          vdd_mv,
  input  logic                 init,
  // host loading port
  input  logic                 host_mode,
  input  logic                 host_en,
  input  logic                 host_we,
  input  logic                 host_instr,
  input  logic [TILE_W-1:0]    host_tile,
  input  logic [ADDR_W-1:0]    host_row,
  input  logic [COLS-1:0]      host_wdata,
  output logic [COLS-1:0]      host_rdata,
  // system settings
  input  logic [15:0]          idle_cycles,
  input  logic [PC_W-1:0]      prog_len,
  input  logic [TILE_W-1:0]    res_tile,
  input  logic [ADDR_W-1:0]    res_row,
  // sensor (its data buffer is read as tile TILE_SENSOR)
  input  logic                 sensor_valid,
  output logic                 sensor_clear,
  output logic                 sensor_rd_en,
  output logic [ADDR_W-1:0]    sensor_rd_row,
  input  logic [COLS-1:0]      sensor_rd_data,
  // transmitter
  output logic                 tx_valid,
  output logic [COLS-1:0]      tx_data,
  // status
  output logic                 power_good,
  output logic [PC_W-1:0]      pc,
  output logic                 parity,
  output logic                 restore_evt,
  output logic                 par_err,
  output logic [3:0]           ctrl_state,   // controller sequencer state
  output cmd_t                 bcast_cmd     // command broadcast to the tiles
);

  localparam int unsigned IT_W = (N_INSTR_TILES > 1) ? $clog2(N_INSTR_TILES) : 1;

  logic por_n;   // volatile reset: system reset and power good
  assign por_n = rst_n && power_good;

  voltage_sense #(.V_ON_MV(V_ON_MV), .V_OFF_MV(V_OFF_MV)) u_vsense (
    .vdd_mv, .power_good
  );

  // ---- memory controller ----
  cmd_t                cmd;
  logic                if_en, rr_en, tiles_busy;
  logic [IT_W-1:0]     if_tile;
  logic [ADDR_W-1:0]   if_row, rr_row;
  logic [TILE_W-1:0]   rr_tile;
  logic [COLS-1:0]     if_rdata, rr_rdata;
  logic [INSTR_W-1:0]  act_instr;

  mem_controller #(
    .N_INSTR_TILES (N_INSTR_TILES), .ROWS (ROWS), .COLS (COLS),
    .NV_WR_CYCLES  (NV_WR_CYCLES),  .PC_W (PC_W), .IT_W (IT_W)
  ) u_ctrl (
    .clk, .rst_n (por_n), .init, .host_mode, .idle_cycles, .prog_len,
    .if_en, .if_tile, .if_row, .if_rdata,
    .cmd, .tiles_busy,
    .sensor_valid, .sensor_clear, .res_tile, .res_row,
    .rr_en, .rr_tile, .rr_row, .rr_rdata,
    .tx_valid, .tx_data,
    .pc, .parity, .act_instr, .restore_evt, .ctrl_state
  );

  assign bcast_cmd = cmd;

  // ---- line buffer ----
  logic [N_DATA_TILES-1:0] d_rd_valid, d_busy, d_par_err;
  logic [COLS-1:0]         d_rd_data [N_DATA_TILES];
  logic [COLS-1:0]         d_pb_rdata [N_DATA_TILES];
  logic [COLS-1:0]         line;

  mem_buffer #(.N_TILES (N_DATA_TILES), .COLS (COLS)) u_buf (
    .clk, .rst_n (por_n), .cmd,
    .tile_rd_valid (d_rd_valid), .tile_rd_data (d_rd_data),
    .sensor_rd_en, .sensor_rd_row, .sensor_rd_data,
    .line
  );

  // ---- data tiles ----
  for (genvar t = 0; t < N_DATA_TILES; t++) begin : g_data
    logic              pb_en, pb_we;
    logic [ADDR_W-1:0] pb_row;
    logic [COLS-1:0]   act_cols;

    always_comb begin
      if (host_mode) begin
        pb_en  = host_en && !host_instr && host_tile == TILE_W'(t);
        pb_we  = host_we;
        pb_row = host_row;
      end else begin
        pb_en  = rr_en && rr_tile == TILE_W'(t);
        pb_we  = 1'b0;
        pb_row = rr_row;
      end
    end

    cram_tile #(.ROWS (ROWS), .COLS (COLS), .SHE (SHE)) u_tile (
      .clk, .rst_n (por_n), .tile_id (TILE_W'(t)), .cmd, .wdata (line),
      .busy (d_busy[t]), .rd_valid (d_rd_valid[t]), .rd_data (d_rd_data[t]),
      .par_err (d_par_err[t]), .act_cols,
      .pb_en, .pb_we, .pb_row, .pb_wdata (host_wdata), .pb_rdata (d_pb_rdata[t])
    );
  end

  // ---- instruction tiles: never receive commands, only port-B reads ----
  logic [COLS-1:0] i_pb_rdata [N_INSTR_TILES];
  cmd_t            no_cmd;
  assign no_cmd = '0;

  for (genvar t = 0; t < N_INSTR_TILES; t++) begin : g_instr
    logic              pb_en, pb_we;
    logic [ADDR_W-1:0] pb_row;
    logic              busy_u, rdv_u, perr_u;
    logic [COLS-1:0]   rdd_u, act_u;

    always_comb begin
      if (host_mode) begin
        pb_en  = host_en && host_instr && host_tile == TILE_W'(t);
        pb_we  = host_we;
        pb_row = host_row;
      end else begin
        pb_en  = if_en && if_tile == IT_W'(t);
        pb_we  = 1'b0;
        pb_row = if_row;
      end
    end

    cram_tile #(.ROWS (ROWS), .COLS (COLS), .SHE (SHE)) u_tile (
      .clk, .rst_n (por_n), .tile_id (TILE_W'(t)), .cmd (no_cmd), .wdata (host_wdata),
      .busy (busy_u), .rd_valid (rdv_u), .rd_data (rdd_u), .par_err (perr_u),
      .act_cols (act_u),
      .pb_en, .pb_we, .pb_row, .pb_wdata (host_wdata), .pb_rdata (i_pb_rdata[t])
    );
  end

  // ---- read-back muxes (selection registered to match the 1-cycle read) ----
  logic              h_instr_q;
  logic [TILE_W-1:0] h_tile_q, rr_tile_q;
  logic [IT_W-1:0]   if_tile_q;

  always_ff @(posedge clk) begin
    h_instr_q <= host_instr;
    h_tile_q  <= host_tile;
    rr_tile_q <= rr_tile;
    if_tile_q <= if_tile;
  end

  always_comb begin
    host_rdata = '0;
    rr_rdata   = '0;
    if_rdata   = '0;
    for (int t = 0; t < N_DATA_TILES; t++) begin
      if (!h_instr_q && h_tile_q == TILE_W'(t)) host_rdata = d_pb_rdata[t];
      if (rr_tile_q == TILE_W'(t))              rr_rdata   = d_pb_rdata[t];
    end
    for (int t = 0; t < N_INSTR_TILES; t++) begin
      if (h_instr_q && h_tile_q == TILE_W'(t))  host_rdata = i_pb_rdata[t];
      if (if_tile_q == IT_W'(t))                if_rdata   = i_pb_rdata[t];
    end
  end

  assign tiles_busy = |d_busy;
  assign par_err    = |d_par_err;

endmodule
