// tb_cram_gate -- self-checking test of the column-parallel MTJ gate.
//
// Drives random rows through an STT instance and a SHE instance and checks
// each column against a truth-table model written independently of the RTL:
// an STT gate whose output was preset correctly gives the gate's truth
// table; one whose output already sits at the switching target keeps it
// (current can only push the output one way); inactive columns never
// change; and applying a gate a second time changes nothing (idempotence,
// the property MASTER's restart relies on). A SHE gate gives the truth
// table whatever the old output was. Purely combinational: no latency.
module tb_cram_gate;
  import master_pkg::*;

  localparam int W = 64;

  opcode_e      op;
  logic [W-1:0] a, b, old, mask, out_stt, out_stt2, out_she;
  logic         g1, g2, g3;
  int           checks = 0, failures = 0;

  cram_gate #(.WIDTH(W), .SHE(1'b0)) u_stt  (.op, .a, .b, .out_old(old),     .mask, .out_new(out_stt),  .is_gate(g1));
  cram_gate #(.WIDTH(W), .SHE(1'b0)) u_stt2 (.op, .a, .b, .out_old(out_stt), .mask, .out_new(out_stt2), .is_gate(g2));
  cram_gate #(.WIDTH(W), .SHE(1'b1)) u_she  (.op, .a, .b, .out_old(old),     .mask, .out_new(out_she),  .is_gate(g3));

  // Truth tables, indexed {a,b} = 3,2,1,0 -> bit 3..0
  function automatic logic truth(opcode_e o, logic x, logic y);
    logic [3:0] t;
    case (o)
      OP_NAND: t = 4'b0111;
      OP_AND:  t = 4'b1000;
      OP_NOR:  t = 4'b0001;
      OP_OR:   t = 4'b1110;
      OP_NOT:  t = 4'b0011;   // depends on x only
      OP_COPY: t = 4'b1100;
      default: t = 4'b0000;
    endcase
    return t[{x, y}];
  endfunction

  function automatic logic preset_of(opcode_e o);
    return (o == OP_AND || o == OP_OR || o == OP_COPY);
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    opcode_e ops[6] = '{OP_NAND, OP_AND, OP_NOR, OP_OR, OP_NOT, OP_COPY};
    for (int it = 0; it < 300; it++) begin
      op   = ops[it % 6];
      a    = {$urandom, $urandom};
      b    = {$urandom, $urandom};
      mask = (it % 7 == 0) ? '1 : {$urandom, $urandom};
      // half the time preset the outputs correctly, else random
      old  = (it % 2 == 0) ? {W{preset_of(op)}} : {$urandom, $urandom};
      #1;
      for (int c = 0; c < W; c++) begin
        logic exp_stt, exp_she;
        if (!mask[c]) begin
          exp_stt = old[c];
          exp_she = old[c];
        end else begin
          exp_she = truth(op, a[c], b[c]);
          exp_stt = (old[c] == preset_of(op)) ? truth(op, a[c], b[c]) : old[c];
        end
        checks++;
        if (out_stt[c] !== exp_stt || out_she[c] !== exp_she || out_stt2[c] !== out_stt[c]) begin
          failures++;
          if (failures < 10)
            $display("FAIL op=%s col=%0d a=%b b=%b old=%b m=%b stt=%b/%b she=%b/%b again=%b",
                     op.name(), c, a[c], b[c], old[c], mask[c], out_stt[c], exp_stt,
                     out_she[c], exp_she, out_stt2[c]);
        end
      end
      checks++;
      if (!(g1 && g2 && g3)) failures++;
    end
    // non-gate opcodes leave the row alone
    op = OP_WRITE; old = {$urandom, $urandom}; mask = '1; #1;
    checks++;
    if (out_stt !== old || out_she !== old || g1) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
