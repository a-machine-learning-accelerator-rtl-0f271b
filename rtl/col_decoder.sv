// col_decoder -- column decoder for the Activate Columns instruction.
//
// An Activate Columns instruction carries up to five 10-bit column
// addresses. The decoder turns them into a one-hot-per-column mask that the
// tile latches, so the columns stay active over many following instructions.
// The paper says the optional address slots exist and that the encoding can
// be modified for bulk addressing; the two encodings here are this design's:
//   OP_ACT_LIST : columns addr[0..4] are active (unused slots repeat addr[0])
//   OP_ACT_RNG  : columns addr[0], addr[0]+s, ... up to addr[1] inclusive,
//                 where s = addr[2] (0 means 1) -- the bulk form
// Any other opcode gives an empty mask. Combinational; COLS <= 1024 columns,
// addresses at or beyond COLS select nothing.
module col_decoder
  import master_pkg::*;
#(
  parameter int unsigned COLS = 1024
) (
  input  opcode_e                       op,
  input  logic [N_ADDR-1:0][ADDR_W-1:0] addr,
  output logic [COLS-1:0]               mask
);

  logic [ADDR_W-1:0] step;
  assign step = (addr[2] == '0) ? ADDR_W'(1) : addr[2];

  logic [ADDR_W-1:0] phase;

  always_comb begin
    mask  = '0;
    phase = '0;
    if (op == OP_ACT_LIST) begin
      // one 10-to-COLS decoder per listed address
      for (int k = 0; k < N_ADDR; k++)
        if (32'(addr[k]) < COLS) mask[addr[k]] = 1'b1;
    end else if (op == OP_ACT_RNG) begin
      // Walk the columns once with a phase counter instead of dividing:
      // column c is selected if lo <= c <= hi and (c - lo) mod step == 0.
      phase = '0;
      for (int c = 0; c < COLS; c++) begin
        if (ADDR_W'(c) >= addr[0] && ADDR_W'(c) <= addr[1]) begin
          if (phase == '0) mask[c] = 1'b1;
          phase = (phase + 1'b1 == step) ? '0 : phase + 1'b1;
        end
      end
    end
  end

endmodule
