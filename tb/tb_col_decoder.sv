// tb_col_decoder -- self-checking test of the Activate Columns decoder.
//
// Random column lists (with repeated slots for shorter lists) and random
// bulk ranges with random steps are decoded at the full 1024-column size and
// compared with a mask built by direct enumeration (stepping from lo to hi),
// which is a different algorithm from the RTL's phase counter. Reserved and
// non-activate opcodes must give an empty mask. Combinational.
module tb_col_decoder;
  import master_pkg::*;

  localparam int COLS = 1024;

  opcode_e                       op;
  logic [N_ADDR-1:0][ADDR_W-1:0] addr;
  logic [COLS-1:0]               mask, exp;
  int                            checks = 0, failures = 0;

  col_decoder #(.COLS(COLS)) dut (.op, .addr, .mask);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what);
    #1;
    checks++;
    if (mask !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s op=%s a=%p popcount got=%0d exp=%0d",
                                  what, op.name(), addr, $countones(mask), $countones(exp));
    end
  endtask

  initial begin
    for (int it = 0; it < 200; it++) begin
      int n;
      op = OP_ACT_LIST;
      n  = 1 + (it % 5);
      for (int k = 0; k < N_ADDR; k++) addr[k] = ADDR_W'($urandom);
      for (int k = n; k < N_ADDR; k++) addr[k] = addr[0];
      exp = '0;
      for (int k = 0; k < N_ADDR; k++) exp[addr[k]] = 1'b1;
      check("list");
    end
    for (int it = 0; it < 200; it++) begin
      int lo, hi, st;
      op = OP_ACT_RNG;
      lo = $urandom % COLS;
      hi = (it % 10 == 0) ? $urandom % COLS : lo + ($urandom % (COLS - lo));
      st = (it % 4 == 0) ? 0 : 1 + ($urandom % 40);
      addr = '0;
      addr[0] = ADDR_W'(lo); addr[1] = ADDR_W'(hi); addr[2] = ADDR_W'(st);
      exp = '0;
      for (int c = lo; c <= hi; c += (st == 0 ? 1 : st)) exp[c] = 1'b1;
      check("range");
    end
    // all columns in one bulk instruction
    op = OP_ACT_RNG; addr = '0; addr[1] = 10'd1023; exp = '1; check("all");
    foreach (addr[k]) addr[k] = ADDR_W'($urandom);
    exp = '0;
    op = OP_NAND;  check("nand");
    op = OP_READ;  check("read");
    op = OP_RSVD6; check("rsvd");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
