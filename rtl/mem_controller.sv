// mem_controller -- MASTER's memory controller and its restart logic.
//
// The controller is the only sequencer in MASTER. It reads the 64-bit
// instruction at the valid program counter from the instruction tiles,
// decodes it and broadcasts it to the data tiles, waits, and then commits
// progress: it writes PC+1 into the invalid PC copy and flips the parity bit
// (pc_unit). Every instruction is idempotent, so a power loss at any point
// costs at most one repeated instruction. When an Activate Columns
// instruction is broadcast it is also written into a non-volatile
// instruction register (act_reg); on every power-up the controller first
// re-broadcasts that instruction, restoring the volatile column latches of
// the tiles, and then resumes at the valid PC. This is the paper's state
// machine:
//
//   RESTORE -> FETCH @PC -> BROADCAST -> IDLE -> UPDATE PC -> FLIP PARITY
//      ^                                                         |
//      +---- power loss anywhere (rst_n)      FETCH <------------+
//
// Timing: a fetch takes 2 cycles (row read of an instruction tile, then
// slot select). After a broadcast the controller waits WAIT_MIN cycles --
// longer than the slowest instruction, so tiles need no handshake -- plus
// `idle_cycles`, the gap that keeps power inside the harvester's budget.
// The PC update and the parity flip each wait for their non-volatile write.
//
// Program flow: instructions run in order and the program repeats after
// prog_len instructions. Before instruction 0 the controller waits for the
// sensor's non-volatile valid bit (new input ready). After the last
// instruction, and before the PC wraps, it reads the result row
// (res_tile, res_row) from the data tiles, presents it on tx_data with a
// one-cycle tx_valid, and pulses sensor_clear to consume the input. These
// three hooks, the fetch packing (COLS/64 instructions per row, slot 0 in
// the low bits) and the wait lengths are this design's own choices; the
// paper describes the PC, parity, restart and wait scheme itself.
//
// Lint note: rst_n is also used by the assertion's `disable iff`, which lint
// reports as a synchronous use of an asynchronous reset (SYNCASYNCNET). The
// assertion is not logic; the warning stands for that reason.
module mem_controller
  import master_pkg::*;
#(
  parameter int unsigned N_INSTR_TILES = 36,
  parameter int unsigned ROWS          = 1024,
  parameter int unsigned COLS          = 1024,
  parameter int unsigned NV_WR_CYCLES  = 2,
  parameter int unsigned PC_W          = $clog2(N_INSTR_TILES * ROWS * (COLS / INSTR_W)),
  parameter int unsigned IT_W          = (N_INSTR_TILES > 1) ? $clog2(N_INSTR_TILES) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,        // volatile reset: power good and system reset
  input  logic                 init,         // factory initialisation of non-volatile state
  input  logic                 host_mode,    // tiles being loaded: hold off
  input  logic [15:0]          idle_cycles,  // extra gap between instructions
  input  logic [PC_W-1:0]      prog_len,     // instructions in the program (>= 1)
  // instruction fetch (port B of the instruction tiles, 1-cycle latency)
  output logic                 if_en,
  output logic [IT_W-1:0]      if_tile,
  output logic [ADDR_W-1:0]    if_row,
  input  logic [COLS-1:0]      if_rdata,
  // broadcast to the data tiles
  output cmd_t                 cmd,
  input  logic                 tiles_busy,
  // sensor and transmitter
  input  logic                 sensor_valid,
  output logic                 sensor_clear,
  input  logic [TILE_W-1:0]    res_tile,
  input  logic [ADDR_W-1:0]    res_row,
  output logic                 rr_en,        // result read (port B of data tiles)
  output logic [TILE_W-1:0]    rr_tile,
  output logic [ADDR_W-1:0]    rr_row,
  input  logic [COLS-1:0]      rr_rdata,
  output logic                 tx_valid,
  output logic [COLS-1:0]      tx_data,
  // architectural state, visible for the system and for test
  output logic [PC_W-1:0]      pc,
  output logic                 parity,
  output logic [INSTR_W-1:0]   act_instr,
  output logic                 restore_evt,  // pulses when the columns are re-activated
  output logic [3:0]           ctrl_state    // sequencer state (state_e encoding)
);

  localparam int unsigned IPR      = COLS / INSTR_W;             // instructions per row
  localparam int unsigned SLOT_W   = (IPR > 1) ? $clog2(IPR) : 1;
  localparam int unsigned PER_TILE = ROWS * IPR;
  localparam int unsigned WAIT_MIN = MAX_INSTR_STEPS + 2;          // slowest op + buffer capture

  typedef enum logic [3:0] {
    S_HOLD, S_RESTORE, S_RESTORE_W, S_FETCH, S_FETCH_W, S_INPUT, S_BCAST,
    S_IDLE, S_RESULT, S_RESULT_W, S_UPD_PC, S_UPD_PC_W, S_FLIP, S_FLIP_W
  } state_e;

  state_e            state;
  logic [16:0]       wait_cnt;
  logic [INSTR_W-1:0] ir;          // fetched instruction (volatile)
  logic              is_last;

  // ---- non-volatile architectural state ----
  logic              pc_upd_we, pc_flip, pc_busy, pc_done;
  logic [PC_W-1:0]   pc_next;
  logic              act_we, act_busy, act_done;

  pc_unit #(.PC_W(PC_W), .WR_CYCLES(NV_WR_CYCLES)) u_pc (
    .clk, .rst_n, .init,
    .upd_we  (pc_upd_we),
    .upd_val (pc_next),
    .flip    (pc_flip),
    .pc      (pc),
    .parity  (parity),
    .busy    (pc_busy),
    .done    (pc_done)
  );

  nv_reg #(.W(INSTR_W), .WR_CYCLES(NV_WR_CYCLES)) u_act_reg (
    .clk, .rst_n, .init,
    .we    (act_we),
    .wdata (ir),
    .q     (act_instr),
    .busy  (act_busy),
    .done  (act_done)
  );

  assign ctrl_state = state;
  assign is_last = (pc >= prog_len - 1'b1);
  assign pc_next = is_last ? '0 : pc + 1'b1;

  // Where the instruction at pc lives.
  logic [SLOT_W-1:0] slot;
  always_comb begin
    if_tile = IT_W'(pc / PC_W'(PER_TILE));
    if_row  = ADDR_W'((pc / PC_W'(IPR)) % PC_W'(ROWS));
    slot    = SLOT_W'(pc % PC_W'(IPR));
  end

  // Stored Activate Columns instruction, as re-issued on restart.
  cmd_t restore_cmd;
  always_comb begin
    restore_cmd       = decode(act_instr);
    restore_cmd.valid = 1'b1;
  end

  // ---- sequencer (volatile) ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_HOLD;
      wait_cnt     <= '0;
      ir           <= '0;
      cmd          <= '0;
      if_en        <= 1'b0;
      rr_en        <= 1'b0;
      rr_tile      <= '0;
      rr_row       <= '0;
      tx_valid     <= 1'b0;
      tx_data      <= '0;
      sensor_clear <= 1'b0;
      pc_upd_we    <= 1'b0;
      pc_flip      <= 1'b0;
      act_we       <= 1'b0;
      restore_evt  <= 1'b0;
    end else begin
      cmd.valid    <= 1'b0;
      if_en        <= 1'b0;
      rr_en        <= 1'b0;
      tx_valid     <= 1'b0;
      sensor_clear <= 1'b0;
      pc_upd_we    <= 1'b0;
      pc_flip      <= 1'b0;
      act_we       <= 1'b0;
      restore_evt  <= 1'b0;
      if (host_mode || init) begin
        state <= S_HOLD;
      end else begin
        unique case (state)
          S_HOLD: state <= S_RESTORE;
          // Re-activate the columns that were active when power was lost.
          S_RESTORE: begin
            if (op_class(restore_cmd.op) == CLS_ACT) begin
              cmd         <= restore_cmd;
              restore_evt <= 1'b1;
              wait_cnt    <= 17'(WAIT_MIN);
              state       <= S_RESTORE_W;
            end else begin
              state <= S_FETCH;
            end
          end
          S_RESTORE_W: begin
            if (wait_cnt == '0) state <= S_FETCH;
            else                wait_cnt <= wait_cnt - 1'b1;
          end
          // Read the instruction at the valid PC.
          S_FETCH: begin
            if_en <= 1'b1;
            state <= S_FETCH_W;
          end
          S_FETCH_W: begin
            if (!if_en) begin
              ir    <= if_rdata[INSTR_W*slot +: INSTR_W];
              state <= S_INPUT;
            end
          end
          // The program starts only when the sensor has new input.
          S_INPUT: begin
            if (pc != '0 || sensor_valid) state <= S_BCAST;
          end
          S_BCAST: begin
            cmd       <= decode(ir);
            cmd.valid <= 1'b1;
            if (op_class(opcode_e'(ir[63:60])) == CLS_ACT) act_we <= 1'b1;
            wait_cnt  <= 17'(WAIT_MIN) + 17'(idle_cycles);
            state     <= S_IDLE;
          end
          S_IDLE: begin
            if (wait_cnt != '0)
              wait_cnt <= wait_cnt - 1'b1;
            else if (!act_busy && !act_we)
              state <= is_last ? S_RESULT : S_UPD_PC;
          end
          // End of the program: hand the result row to the transmitter.
          S_RESULT: begin
            rr_en   <= 1'b1;
            rr_tile <= res_tile;
            rr_row  <= res_row;
            state   <= S_RESULT_W;
          end
          S_RESULT_W: begin
            if (!rr_en) begin
              tx_valid     <= 1'b1;
              tx_data      <= rr_rdata;
              sensor_clear <= 1'b1;
              state        <= S_UPD_PC;
            end
          end
          S_UPD_PC: begin
            if (!pc_busy) begin
              pc_upd_we <= 1'b1;
              state     <= S_UPD_PC_W;
            end
          end
          S_UPD_PC_W: if (pc_done) state <= S_FLIP;
          S_FLIP: begin
            pc_flip <= 1'b1;
            state   <= S_FLIP_W;
          end
          S_FLIP_W: if (pc_done) state <= S_FETCH;
          default: state <= S_HOLD;
        endcase
      end
    end
  end

  // Tiles need no handshake because the controller always waits out the
  // slowest instruction: no tile may still be busy at a new broadcast.
  a_no_overlap: assert property (@(posedge clk) disable iff (!rst_n)
                                 cmd.valid |-> !tiles_busy);

endmodule
