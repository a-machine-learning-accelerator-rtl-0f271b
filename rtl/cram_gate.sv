// cram_gate -- the MTJ threshold gate, applied to every column of a tile.
//
// In a CRAM array a gate is formed by two input MTJs in parallel, in series
// with an output MTJ. A voltage drives current through them; if the input
// MTJs' combined resistance is low enough the current switches the output
// MTJ, otherwise the output keeps its value. Current in one direction can
// only switch the output to 1 (AP), in the other only to 0 (P). An STT gate
// therefore needs its output preset to the value opposite its switching
// target, and a gate can only ever move the output towards that target --
// which is what makes repeating a gate after a power loss harmless.
//
// Per column c with mask[c] = 1 (column active):
//   STT (SHE = 0): out_new[c] = sw[c] ? target : out_old[c]
//   SHE (SHE = 1): out_new[c] = f(a[c], b[c])   (no preset needed)
// Inactive columns keep out_old.
//
// Following the paper: NAND is preset 0 and switches to 1 when either input
// is 0 (low resistance); AND is preset 1 and switches to 0 under the same
// condition with the current reversed. The paper names NOT, COPY, NOR and OR
// without giving their bias; here NOR/OR switch only when both inputs are 0
// (the lowest-resistance case, a lower drive voltage), NOT/COPY switch when
// their single input is 0, with the direction chosen to give the named
// function. Combinational; WIDTH is the number of columns.
module cram_gate
  import master_pkg::*;
#(
  parameter int unsigned WIDTH = 1024,
  parameter bit          SHE   = 1'b0   // 0: STT cell (paper's main design), 1: SHE cell
) (
  input  opcode_e           op,
  input  logic [WIDTH-1:0]  a,        // input row n1
  input  logic [WIDTH-1:0]  b,        // input row n2 (ignored by NOT / COPY)
  input  logic [WIDTH-1:0]  out_old,  // present state of output row m
  input  logic [WIDTH-1:0]  mask,     // active columns
  output logic [WIDTH-1:0]  out_new,  // state of row m after the gate
  output logic              is_gate   // op is a logic gate
);

  logic [WIDTH-1:0] sw;      // columns where the current is above threshold
  logic             target;  // value a switching output MTJ ends in
  logic [WIDTH-1:0] f;       // ideal gate function (used by SHE cells)

  always_comb begin
    is_gate = 1'b1;
    sw      = '0;
    target  = 1'b0;
    f       = '0;
    unique case (op)
      OP_NAND: begin sw = ~(a & b); target = 1'b1; f = ~(a & b); end
      OP_AND:  begin sw = ~(a & b); target = 1'b0; f =  (a & b); end
      OP_NOR:  begin sw = ~(a | b); target = 1'b1; f = ~(a | b); end
      OP_OR:   begin sw = ~(a | b); target = 1'b0; f =  (a | b); end
      OP_NOT:  begin sw = ~a;       target = 1'b1; f = ~a;       end
      OP_COPY: begin sw = ~a;       target = 1'b0; f =  a;       end
      default: is_gate = 1'b0;
    endcase
  end

  always_comb begin
    if (!is_gate)
      out_new = out_old;
    else if (SHE)
      out_new = (f & mask) | (out_old & ~mask);
    else
      out_new = ((sw & mask) & {WIDTH{target}}) | (out_old & ~(sw & mask));
  end

endmodule
