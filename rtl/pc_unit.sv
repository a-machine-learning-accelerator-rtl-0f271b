// pc_unit -- the duplicated non-volatile program counter of MASTER.
//
// A power loss in the middle of writing the PC could leave it corrupt, so,
// as the paper prescribes, the PC is kept twice (PC-A and PC-B) together
// with a non-volatile parity bit: parity 0 means PC-A is valid, parity 1
// means PC-B is valid. The valid copy always points at the instruction being
// executed. After an instruction completes, the controller writes the next
// PC into the *invalid* copy (upd_we) and then flips the parity bit (flip).
// A power loss during the first write only damages the copy that is not in
// use; a power loss before the flip makes the old instruction run again,
// which is harmless because every MASTER instruction is idempotent. The
// parity bit is a single MTJ, so its own write cannot be torn.
//
// Interface: `pc` is the valid copy, combinational from the non-volatile
// state. upd_we/flip are one-cycle requests accepted when !busy; `done`
// pulses when the requested write has finished. `init` is the factory
// initialisation (both copies 0, parity 0).
module pc_unit #(
  parameter int unsigned PC_W      = 20,
  parameter int unsigned WR_CYCLES = 2
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            init,
  input  logic            upd_we,
  input  logic [PC_W-1:0] upd_val,
  input  logic            flip,
  output logic [PC_W-1:0] pc,
  output logic            parity,
  output logic            busy,
  output logic            done
);

  logic [PC_W-1:0] pc_a, pc_b;
  logic            busy_a, busy_b, busy_p, done_a, done_b, done_p;

  nv_reg #(.W(PC_W), .WR_CYCLES(WR_CYCLES)) u_pc_a (
    .clk, .rst_n, .init,
    .we    (upd_we && parity),
    .wdata (upd_val),
    .q     (pc_a), .busy (busy_a), .done (done_a)
  );

  nv_reg #(.W(PC_W), .WR_CYCLES(WR_CYCLES)) u_pc_b (
    .clk, .rst_n, .init,
    .we    (upd_we && !parity),
    .wdata (upd_val),
    .q     (pc_b), .busy (busy_b), .done (done_b)
  );

  nv_reg #(.W(1), .WR_CYCLES(1)) u_parity (
    .clk, .rst_n, .init,
    .we    (flip),
    .wdata (~parity),
    .q     (parity), .busy (busy_p), .done (done_p)
  );

  assign pc   = parity ? pc_b : pc_a;
  assign busy = busy_a | busy_b | busy_p;
  assign done = done_a | done_b | done_p;

endmodule
