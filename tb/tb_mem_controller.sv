// tb_mem_controller -- self-checking test of the memory controller.
//
// The testbench plays the instruction tiles (a row memory answering fetches
// one cycle later) and the data tiles' result port. It loads a program of
// distinct instructions, some of them Activate Columns, and checks:
//  * nothing is broadcast until the sensor's valid bit is set, and again
//    after the program wraps (then the result row goes out on tx_data with
//    tx_valid, sensor_clear pulses, and the read used res_tile / res_row);
//  * instructions are broadcast in program order; after a power loss the
//    only allowed deviation is repeating the interrupted instruction once;
//  * on every power-up the last Activate Columns instruction is broadcast
//    first (restore_evt), unless the loss hit while that instruction itself
//    was still uncommitted, in which case it is re-executed next;
//  * the gap between broadcasts exceeds the slowest instruction plus
//    idle_cycles, and grows by exactly the change in idle_cycles.
module tb_mem_controller;
  import master_pkg::*;

  localparam int NIT = 1, ROWS = 16, COLS = 128, WRC = 2;
  localparam int IPR = COLS / 64;
  localparam int PC_W = $clog2(NIT * ROWS * IPR);
  localparam int PLEN = 23;

  logic               clk = 0, rst_n = 0, init = 0, host_mode = 0;
  logic [15:0]        idle_cycles = '0;
  logic [PC_W-1:0]    prog_len = PC_W'(PLEN);
  logic               if_en;
  logic [0:0]         if_tile;
  logic [ADDR_W-1:0]  if_row;
  logic [COLS-1:0]    if_rdata;
  cmd_t               cmd;
  logic               tiles_busy = 0;
  logic               sensor_valid = 0, sensor_clear;
  logic [TILE_W-1:0]  res_tile = 9'd7;
  logic [ADDR_W-1:0]  res_row = 10'd33;
  logic               rr_en;
  logic [TILE_W-1:0]  rr_tile;
  logic [ADDR_W-1:0]  rr_row;
  logic [COLS-1:0]    rr_rdata;
  logic               tx_valid;
  logic [COLS-1:0]    tx_data;
  logic [PC_W-1:0]    pc;
  logic               parity;
  logic [63:0]        act_instr;
  logic               restore_evt;
  logic [3:0]         ctrl_state;

  mem_controller #(.N_INSTR_TILES(NIT), .ROWS(ROWS), .COLS(COLS), .NV_WR_CYCLES(WRC)) dut (.*);

  always #5 clk = ~clk;

  logic [63:0]     prog [PLEN];
  logic [COLS-1:0] imem [ROWS];
  logic [COLS-1:0] result_row;
  int checks = 0, failures = 0;

  // instruction tile model
  always_ff @(posedge clk) if (if_en) if_rdata <= imem[if_row[3:0]];
  // data tile result port model
  always_ff @(posedge clk) if (rst_n && rr_en) begin
    rr_rdata <= result_row;
    checks++;
    if (rr_tile != res_tile || rr_row != res_row) begin
      failures++; $display("FAIL result read tile=%0d row=%0d", rr_tile, rr_row);
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int index_of(cmd_t c);
    for (int i = 0; i < PLEN; i++) begin
      cmd_t d = decode(prog[i]);
      if (d.op == c.op && d.tile == c.tile && d.addr == c.addr) return i;
    end
    return -1;
  endfunction

  // ---- broadcast monitor ----
  int  last_idx = -1, last_act = -1, n_bcast = 0, n_restore = 0, n_repeat = 0;
  int  n_tx = 0, n_clear = 0, last_time = 0, gap = 0;
  bit  restarted = 0, expect_restore = 0, prev_uncommitted_act = 0;

  always @(posedge clk) begin
    if (rst_n && cmd.valid) begin
      if (restore_evt) begin
        n_restore++;
        checks++;
        if (!expect_restore) begin failures++; $display("FAIL unexpected restore"); end
        if (last_act >= 0 && !prev_uncommitted_act &&
            !(cmd.op == decode(prog[last_act]).op && cmd.addr == decode(prog[last_act]).addr)) begin
          failures++; $display("FAIL restore broadcast is not the last Activate Columns");
        end
        expect_restore = 0;
      end else begin
        automatic int i = index_of(cmd);
        automatic int t = $time / 10;
        checks++;
        if (i < 0) begin failures++; $display("FAIL unknown broadcast"); end
        else if (last_idx >= 0 && i != (last_idx + 1) % PLEN) begin
          if (i == last_idx && restarted) n_repeat++;
          else begin failures++; $display("FAIL order: %0d after %0d", i, last_idx); end
        end
        if (!restarted && last_idx >= 0) gap = t - last_time;
        last_time = t;
        if (i >= 0 && op_class(cmd.op) == CLS_ACT) last_act = i;
        last_idx = i;
        restarted = 0;
        n_bcast++;
      end
    end
    if (rst_n && tx_valid) begin
      n_tx++;
      checks++;
      if (tx_data !== result_row) begin failures++; $display("FAIL tx_data"); end
    end
    if (rst_n && sensor_clear) n_clear++;
  end

  task automatic power_cut(int off_cycles);
    // an Activate Columns whose PC has not been committed may be torn in act_reg
    prev_uncommitted_act = (last_idx >= 0 && op_class(decode(prog[last_idx]).op) == CLS_ACT &&
                            pc == PC_W'(last_idx));
    @(negedge clk); rst_n = 0;
    repeat (off_cycles) @(negedge clk);
    expect_restore = (last_act >= 0);
    restarted = 1;
    rst_n = 1;
  endtask

  initial begin
    int g0, g1;
    // program: distinct instructions; every 5th activates columns
    for (int i = 0; i < PLEN; i++) begin
      if (i % 5 == 1)
        prog[i] = encode(OP_ACT_RNG, 9'd1, 10'(i), 10'(i + 40), 10'd1);
      else if (i % 5 == 3)
        prog[i] = encode(OP_ACT_LIST, TILE_BCAST, 10'(i), 10'(i + 1), 10'(i + 2), 10'(i + 3), 10'(i + 4));
      else
        prog[i] = encode(opcode_e'(i % 2 ? OP_NAND : OP_PRESET0), 9'(i), 10'(2 * i), 10'(2 * i + 2), 10'(2 * i + 1));
    end
    foreach (imem[r]) imem[r] = '0;
    for (int i = 0; i < PLEN; i++) imem[i / IPR][64 * (i % IPR) +: 64] = prog[i];
    result_row = {4{$urandom}};

    init = 1; @(negedge clk); @(negedge clk); init = 0;
    rst_n = 1;
    // held until the sensor has data
    repeat (60) @(negedge clk);
    checks++;
    if (n_bcast != 0) begin failures++; $display("FAIL broadcast before input valid"); end
    sensor_valid = 1;
    // run one inference undisturbed, measure gaps at two idle settings
    wait (last_idx == 5); @(negedge clk); g0 = gap;
    idle_cycles = 16'd10;
    wait (last_idx == 8); @(negedge clk); g1 = gap;
    checks++;
    if (g0 < 8 || g1 - g0 != 10) begin failures++; $display("FAIL gaps %0d %0d", g0, g1); end
    wait (n_tx == 1);
    sensor_valid = 0;
    @(negedge clk);
    checks++;
    if (n_clear != 1) begin failures++; $display("FAIL sensor_clear count %0d", n_clear); end
    repeat (100) @(negedge clk);
    checks++;
    if (last_idx != PLEN - 1 || pc != 0) begin failures++; $display("FAIL did not wait for new input"); end
    // second inference with power cuts at pseudo-random points
    sensor_valid = 1;
    idle_cycles = 16'd3;
    for (int k = 0; k < 40; k++) begin
      repeat (5 + $urandom % 37) @(negedge clk);
      power_cut(1 + $urandom % 4);
    end
    wait (n_tx == 2);
    @(negedge clk);
    checks++;
    if (n_restore == 0 || n_repeat == 0) begin
      failures++; $display("FAIL restores=%0d repeats=%0d", n_restore, n_repeat);
    end
    $display("broadcasts=%0d restores=%0d repeated=%0d gaps=%0d/%0d", n_bcast, n_restore, n_repeat, g0, g1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
