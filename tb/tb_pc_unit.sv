// tb_pc_unit -- self-checking test of the duplicated PC with parity bit.
//
// Steps the PC many times through the two-write commit (write the invalid
// copy, then flip the parity) and checks the valid PC and the parity after
// each step. Then it cuts power (volatile reset) at every cycle of the
// commit sequence in turn and checks the paper's guarantee: the valid PC is
// always either the old value (commit not finished, instruction will be
// repeated) or the new one (commit finished), never a corrupted value, even
// when the cut tears the write of the invalid copy.
module tb_pc_unit;
  localparam int PC_W = 12, WRC = 3;

  logic            clk = 0, rst_n = 0, init = 0, upd_we = 0, flip = 0;
  logic [PC_W-1:0] upd_val = '0, pc;
  logic            parity, busy, done;
  int              checks = 0, failures = 0, torn = 0;

  pc_unit #(.PC_W(PC_W), .WR_CYCLES(WRC)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // The controller's commit: write pc+1 to the invalid copy, then flip.
  // Power is cut `cut` cycles after the start (-1: never).
  task automatic commit(logic [PC_W-1:0] nxt, int cut);
    int cyc = 0;
    bit cutnow = 0;
    @(negedge clk); upd_we = 1; upd_val = nxt;
    @(negedge clk); upd_we = 0;
    cyc = 1;
    while (!done) begin
      if (cyc == cut) begin cutnow = 1; break; end
      @(negedge clk); cyc++;
    end
    if (!cutnow) begin
      if (cyc == cut) cutnow = 1;
      else begin
        @(negedge clk); flip = 1; cyc++;
        @(negedge clk); flip = 0; cyc++;
        while (!done) begin
          if (cyc == cut) begin cutnow = 1; break; end
          @(negedge clk); cyc++;
        end
      end
    end
    if (cutnow) begin
      rst_n = 0;
      @(negedge clk);
      rst_n = 1;
    end
    @(negedge clk);
  endtask

  initial begin
    logic [PC_W-1:0] exp_pc;
    logic            exp_par;
    init = 1; @(negedge clk); @(negedge clk); init = 0; rst_n = 1;
    checks++;
    if (pc !== '0 || parity !== 1'b0) begin failures++; $display("FAIL init"); end
    exp_pc = 0; exp_par = 0;
    for (int i = 0; i < 30; i++) begin
      commit(exp_pc + 1'b1, -1);
      exp_pc++; exp_par = ~exp_par;
      checks++;
      if (pc !== exp_pc || parity !== exp_par) begin
        failures++; $display("FAIL step %0d pc=%0d exp=%0d par=%b", i, pc, exp_pc, parity);
      end
    end
    // interrupted commits: the valid PC is old or new, never anything else
    for (int cut = 1; cut < 2 * WRC + 6; cut++) begin
      logic [PC_W-1:0] pc_old;
      pc_old = pc;
      
      commit(~pc_old, cut);   // a value differing in every bit shows tearing
      if ((parity ? dut.u_pc_a.q : dut.u_pc_b.q) != pc_old &&
          (parity ? dut.u_pc_a.q : dut.u_pc_b.q) != ~pc_old &&
          pc == pc_old)
        torn++;
      checks++;
      if (pc !== pc_old && pc !== ~pc_old) begin
        failures++; $display("FAIL cut=%0d pc=%h before=%h", cut, pc, pc_old);
      end
      // finish the interrupted step the way the controller would
      if (pc == pc_old) commit(~pc_old, -1);
      checks++;
      if (pc !== ~pc_old) begin failures++; $display("FAIL redo cut=%0d pc=%h", cut, pc); end
    end
    checks++;
    if (torn == 0) begin failures++; $display("FAIL no torn PC write was produced"); end
    $display("torn writes survived: %0d", torn);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
