// tb_nv_reg -- self-checking test of the tearable non-volatile register.
//
// Checks that a write takes exactly WR_CYCLES cycles of `busy` followed by a
// one-cycle `done`, that the stored value then equals the data written, that
// the value survives the volatile reset (a power loss) untouched, that a
// power loss part way through a write leaves the low slices new and the high
// slices old (a torn write), and that `init` loads the factory value.
module tb_nv_reg;
  localparam int W = 16, WRC = 4, SLICE = W / WRC;

  logic         clk = 0, rst_n = 0, init = 0, we = 0;
  logic [W-1:0] wdata = '0, q;
  logic         busy, done;
  int           checks = 0, failures = 0;

  nv_reg #(.W(W), .WR_CYCLES(WRC), .INIT(16'hA5C3)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(string what, logic [W-1:0] got, logic [W-1:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s got=%h exp=%h", what, got, exp);
    end
  endtask

  task automatic do_write(logic [W-1:0] v);
    int nb = 0;
    @(negedge clk); we = 1; wdata = v;
    @(negedge clk); we = 0;
    while (busy) begin nb++; @(negedge clk); end
    checks++;
    if (nb != WRC || !done) begin
      failures++;
      $display("FAIL write latency busy=%0d done=%b", nb, done);
    end
    expect_eq("write", q, v);
  endtask

  initial begin
    init = 1;
    repeat (2) @(negedge clk);
    init = 0;
    expect_eq("init", q, 16'hA5C3);
    rst_n = 1;
    for (int i = 0; i < 20; i++) do_write(16'($urandom));
    // power loss with no write in progress: value kept
    begin
      logic [W-1:0] keep;
      keep = q;
      @(negedge clk); rst_n = 0; repeat (3) @(negedge clk); rst_n = 1;
      expect_eq("retain", q, keep);
    end
    // torn writes: cut power after k slices have been written
    for (int k = 1; k < WRC; k++) begin
      logic [W-1:0] oldv, newv, expv;
      do_write(16'h0000);
      oldv = q; newv = 16'hFFFF;
      @(negedge clk); we = 1; wdata = newv;
      @(negedge clk); we = 0;           // slice 0 written at the next edge
      repeat (k - 1) @(negedge clk);
      @(negedge clk);                   // k slices now written
      rst_n = 0;
      @(negedge clk); rst_n = 1;
      expv = oldv;
      for (int i = 0; i < k * SLICE; i++) expv[i] = newv[i];
      expect_eq($sformatf("torn k=%0d", k), q, expv);
    end
    // after a torn write a complete write still works
    do_write(16'h1234);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
