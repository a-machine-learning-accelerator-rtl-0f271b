// cram_tile -- one MASTER computational-RAM tile (ROWS x COLS MTJ cells).
//
// A tile is an STT-MRAM array whose columns also carry a logic line, so that
// cells of the same column can be wired into a threshold gate: inputs on
// rows n1 and n2 (same parity, one bit line), output on row m (the other
// parity). A gate is applied in every *active* column at once -- the tile's
// column-level parallelism -- and the set of active columns is held by a
// latch loaded by Activate Columns instructions. The array is non-volatile;
// the column latch and the command in flight are not, and are cleared by
// the power-on reset rst_n.
//
// Commands arrive as the memory controller's broadcast (cmd_t, one-cycle
// valid strobe). A tile takes a command when cmd.tile is its tile_id or the
// broadcast address; Activate Columns is taken by every tile, and a tile
// that is not addressed by it clears its latch, so that the last Activate
// Columns instruction alone defines which columns are active anywhere (what
// the restart procedure relies on). Reads must name one tile.
//
// Timing: decoding each row or column address costs one cycle, then one
// cycle applies the operation, so an instruction with k addresses completes
// k+1 cycles after its strobe (2 for memory, 3 for NOT/COPY, 4 for two-input
// gates and ranges, 6 for a five-column list). `busy` is high meanwhile.
//   OP_READ    : row -> rd_data, rd_valid pulses for one cycle
//   OP_WRITE   : wdata (line buffer) -> row, active columns only
//   OP_PRESETx : constant -> row, active columns only
//   logic      : cram_gate on rows n1, n2 -> m, active columns only; a row
//                parity violation performs nothing and pulses par_err
// Port B (pb_*) is a plain full-row read/write port with one cycle read
// latency, used to load the tile before deployment, by the controller to
// fetch instructions from instruction tiles, and to read out results.
//
// The per-address latency and masking of writes by the active columns are
// this design's choices; the paper gives the array, the gate rules and
// that instruction latency grows with the number of addresses. (The valid
// bit of the captured command is not needed after capture; lint reports it
// as unused.)
module cram_tile
  import master_pkg::*;
#(
  parameter int unsigned       ROWS    = 1024,
  parameter int unsigned       COLS    = 1024,
  parameter bit                SHE     = 1'b0
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [TILE_W-1:0]     tile_id,      // this tile's address (strapped)
  // broadcast command and line-buffer data
  input  cmd_t                  cmd,
  input  logic [COLS-1:0]       wdata,
  output logic                  busy,
  output logic                  rd_valid,
  output logic [COLS-1:0]       rd_data,
  output logic                  par_err,
  output logic [COLS-1:0]       act_cols,
  // direct row port
  input  logic                  pb_en,
  input  logic                  pb_we,
  input  logic [ADDR_W-1:0]     pb_row,
  input  logic [COLS-1:0]       pb_wdata,
  output logic [COLS-1:0]       pb_rdata
);

  localparam int unsigned RA_W = (ROWS > 1) ? $clog2(ROWS) : 1;

  logic [COLS-1:0] mem [ROWS];   // non-volatile array: never reset

  // ---- command capture and address-decode countdown (volatile) ----
  cmd_t        cur;
  logic        pending;
  logic [2:0]  steps;
  logic        addressed, is_act;

  assign is_act    = (op_class(cmd.op) == CLS_ACT);
  assign addressed = (cmd.tile == tile_id) ||
                     (cmd.tile == TILE_BCAST && cmd.op != OP_READ);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pending <= 1'b0;
      steps   <= '0;
      cur     <= '0;
    end else if (cmd.valid && (addressed || is_act) && op_n_addr(cmd.op) != 0) begin
      pending <= 1'b1;
      steps   <= 3'(op_n_addr(cmd.op));
      cur     <= cmd;
    end else if (pending) begin
      if (steps == '0) pending <= 1'b0;
      else             steps   <= steps - 1'b1;
    end
  end

  assign busy = pending;

  logic apply;
  assign apply = pending && (steps == '0);

  logic cur_mine;
  assign cur_mine = (cur.tile == tile_id) ||
                    (cur.tile == TILE_BCAST && cur.op != OP_READ);

  // ---- row selection for the operation ----
  logic [ADDR_W-1:0] n1, n2, m;
  logic              one_in, rows_ok, parity_ok;

  always_comb begin
    one_in = op_one_input(cur.op);
    n1     = cur.addr[0];
    n2     = one_in ? cur.addr[0] : cur.addr[1];
    m      = one_in ? cur.addr[1] : cur.addr[2];
    rows_ok   = (32'(n1) < ROWS) && (32'(n2) < ROWS) && (32'(m) < ROWS);
    parity_ok = (n1[0] == n2[0]) && (m[0] != n1[0]);
  end

  logic [COLS-1:0] row_a, row_b, row_m, gate_out;
  logic            is_gate;
  assign row_a = mem[RA_W'(n1)];
  assign row_b = mem[RA_W'(n2)];
  assign row_m = mem[RA_W'(m)];

  cram_gate #(.WIDTH(COLS), .SHE(SHE)) u_gate (
    .op      (cur.op),
    .a       (row_a),
    .b       (row_b),
    .out_old (row_m),
    .mask    (act_cols),
    .out_new (gate_out),
    .is_gate (is_gate)
  );

  // ---- column decoder and the active-column latch (volatile) ----
  logic [COLS-1:0] dec_mask;

  col_decoder #(.COLS(COLS)) u_coldec (
    .op   (cur.op),
    .addr (cur.addr),
    .mask (dec_mask)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)
      act_cols <= '0;
    else if (apply && op_class(cur.op) == CLS_ACT)
      act_cols <= cur_mine ? dec_mask : '0;
  end

  // ---- read result and parity error (volatile) ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_valid <= 1'b0;
      rd_data  <= '0;
      par_err  <= 1'b0;
    end else begin
      rd_valid <= 1'b0;
      par_err  <= 1'b0;
      if (apply && cur.op == OP_READ && cur.tile == tile_id && 32'(n1) < ROWS) begin
        rd_valid <= 1'b1;
        rd_data  <= row_a;
      end
      if (apply && cur_mine && is_gate && !(rows_ok && parity_ok))
        par_err <= 1'b1;
    end
  end

  // ---- array writes ----
  logic [RA_W-1:0] wr1, wrm;
  assign wr1 = RA_W'(n1);
  assign wrm = RA_W'(m);

  always_ff @(posedge clk) begin
    if (apply && cur_mine && 32'(n1) < ROWS) begin
      unique case (cur.op)
        OP_WRITE:   mem[wr1] <= (wdata & act_cols) | (row_a & ~act_cols);
        OP_PRESET0: mem[wr1] <= row_a & ~act_cols;
        OP_PRESET1: mem[wr1] <= row_a |  act_cols;
        default: if (is_gate && rows_ok && parity_ok) mem[wrm] <= gate_out;
      endcase
    end
    if (pb_en && pb_we && 32'(pb_row) < ROWS)
      mem[RA_W'(pb_row)] <= pb_wdata;
  end

  always_ff @(posedge clk) begin
    if (pb_en && !pb_we && 32'(pb_row) < ROWS)
      pb_rdata <= mem[RA_W'(pb_row)];
  end

endmodule
