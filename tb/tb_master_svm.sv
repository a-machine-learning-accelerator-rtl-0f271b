// tb_master_svm -- MASTER running the core of a binarized SVM kernel.
//
// With binarized inputs (the paper's binarized MNIST), a multiplication of
// an input element by a binary support-vector element becomes an AND gate,
// and the kernel's dot product becomes a count of the ANDs that are 1. This
// test runs that computation in a data tile, column-parallel: every column
// holds one support vector (E one-bit elements, one per even row) and gets
// its own input bits from the sensor, and each column accumulates
//   acc[c] = sum over j of x_j[c] AND sv_j[c]
// in a B-bit counter built from NAND-based half adders. Each element costs
// one sensor-to-tile transfer, one preset + AND, and a ripple increment; the
// program is compiled by the generator below, which presets every gate
// output and copies values across row parity where a gate needs it.
//
// The reduced size (2 data tiles of 1024 x 256, one instruction tile) keeps
// the run short. Random supply cuts interrupt the program throughout. The
// counter rows are read back through the host port and the top counter bit
// arrives at the transmitter; both are checked against a popcount computed
// here, and every mechanism used is counted (a count of zero fails).
module tb_master_svm;
  import master_pkg::*;

  localparam int unsigned NDT = 2, NIT = 1, ROWS = 1024, COLS = 256;
  localparam int unsigned PC_W = $clog2(NIT * ROWS * (COLS / INSTR_W));
  localparam int unsigned IPR = COLS / 64;
  localparam int unsigned E = 12;            // elements per vector
  localparam int unsigned B = $clog2(E + 1); // counter bits
  localparam logic [TILE_W-1:0] T0 = 9'd0;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic                rst_n, init, host_mode, host_en, host_we, host_instr;
  logic [15:0]         vdd_mv, idle_cycles;
  logic [TILE_W-1:0]   host_tile, res_tile;
  logic [ADDR_W-1:0]   host_row, res_row, sensor_rd_row;
  logic [COLS-1:0]     host_wdata, host_rdata, sensor_rd_data, tx_data;
  logic [PC_W-1:0]     prog_len, pc;
  logic                sensor_valid, sensor_clear, sensor_rd_en, tx_valid;
  logic                power_good, parity, restore_evt, par_err;
  logic [3:0]          ctrl_state;
  cmd_t                bcast_cmd;

  master_top #(
    .N_DATA_TILES (NDT), .N_INSTR_TILES (NIT), .ROWS (ROWS), .COLS (COLS)
  ) dut (.*);

  int checks = 0, failures = 0;

  task automatic fail(string s);
    failures++;
    if (failures < 20) $display("FAIL %s", s);
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    fail("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- program generator ----------------
  logic [63:0] prog [$];
  int sig_e [$], sig_o [$];
  int next_even, next_odd;

  function automatic void emit(opcode_e op, logic [TILE_W-1:0] t, int a1, int a2 = 0, int a3 = 0);
    prog.push_back(encode(op, t, ADDR_W'(a1), ADDR_W'(a2), ADDR_W'(a3)));
  endfunction

  function automatic int alloc(int p);
    int r;
    if (p == 0) begin r = next_even; next_even += 2; end
    else        begin r = next_odd;  next_odd  += 2; end
    if (r >= int'(ROWS)) $fatal(1, "program needs more rows");
    return r;
  endfunction

  function automatic int new_sig(int row);
    sig_e.push_back((row % 2 == 0) ? row : -1);
    sig_o.push_back((row % 2 == 1) ? row : -1);
    return sig_e.size() - 1;
  endfunction

  function automatic int get_row(int v, int p);
    int dst, src;
    if (p == 0 && sig_e[v] >= 0) return sig_e[v];
    if (p == 1 && sig_o[v] >= 0) return sig_o[v];
    src = (p == 0) ? sig_o[v] : sig_e[v];
    dst = alloc(p);
    emit(OP_PRESET1, T0, dst);
    emit(OP_COPY, T0, src, dst);
    if (p == 0) sig_e[v] = dst; else sig_o[v] = dst;
    return dst;
  endfunction

  // two-input gate with its preset (NAND presets 0, AND presets 1)
  function automatic int gate(opcode_e op, int v1, int v2);
    int p, r1, r2, ro;
    p  = (sig_e[v1] >= 0) ? 0 : 1;
    r1 = get_row(v1, p);
    r2 = get_row(v2, p);
    ro = alloc(1 - p);
    emit(op == OP_AND ? OP_PRESET1 : OP_PRESET0, T0, ro);
    emit(op, T0, r1, r2, ro);
    return new_sig(ro);
  endfunction

  int x_sig [E], w_sig [E], acc [B];

  function automatic void build_program();
    int prod, carry, n1, n2, n3, s;
    next_even = 0; next_odd = 1;
    for (int j = 0; j < int'(E); j++) x_sig[j] = new_sig(alloc(0));
    for (int j = 0; j < int'(E); j++) w_sig[j] = new_sig(alloc(0));
    emit(OP_ACT_RNG, TILE_BCAST, 0, COLS - 1, 0);
    for (int b = 0; b < int'(B); b++) begin
      acc[b] = new_sig(alloc(0));
      emit(OP_PRESET0, T0, sig_e[acc[b]]);
    end
    for (int j = 0; j < int'(E); j++) begin
      emit(OP_READ, TILE_SENSOR, j);
      emit(OP_WRITE, T0, sig_e[x_sig[j]]);
      prod  = gate(OP_AND, x_sig[j], w_sig[j]);     // binarized multiply
      carry = prod;
      for (int b = 0; b < int'(B); b++) begin        // acc += prod
        n1 = gate(OP_NAND, acc[b], carry);
        n2 = gate(OP_NAND, acc[b], n1);
        n3 = gate(OP_NAND, carry, n1);
        s  = gate(OP_NAND, n2, n3);                   // acc ^ carry
        if (b + 1 < int'(B)) carry = gate(OP_AND, acc[b], carry);
        acc[b] = s;
      end
    end
  endfunction

  // ---------------- sensor model ----------------
  logic [COLS-1:0] sensor_mem [E];
  always_ff @(posedge clk) begin
    if (sensor_rd_en)
      sensor_rd_data <= (32'(sensor_rd_row) < E) ? sensor_mem[sensor_rd_row] : '0;
    if (sensor_clear) sensor_valid <= 1'b0;
  end

  // ---------------- mechanism counters ----------------
  int n_restore = 0, n_tx = 0, n_sensor = 0, n_and = 0, n_nand = 0, n_copy = 0, n_cuts = 0;
  logic [COLS-1:0] last_tx;
  always @(posedge clk) if (rst_n && power_good) begin
    if (restore_evt) n_restore++;
    if (tx_valid) begin n_tx++; last_tx = tx_data; end
    if (sensor_rd_en) n_sensor++;
    if (bcast_cmd.valid && bcast_cmd.op == OP_AND)  n_and++;
    if (bcast_cmd.valid && bcast_cmd.op == OP_NAND) n_nand++;
    if (bcast_cmd.valid && bcast_cmd.op == OP_COPY) n_copy++;
  end

  // ---------------- host access ----------------
  task automatic host_write(bit instr, int tile, int row, logic [COLS-1:0] d);
    @(negedge clk);
    host_en = 1; host_we = 1; host_instr = instr; host_tile = TILE_W'(tile);
    host_row = ADDR_W'(row); host_wdata = d;
    @(negedge clk);
    host_en = 0; host_we = 0;
  endtask

  task automatic host_read(int tile, int row, output logic [COLS-1:0] d);
    @(negedge clk);
    host_en = 1; host_we = 0; host_instr = 0; host_tile = TILE_W'(tile);
    host_row = ADDR_W'(row);
    @(negedge clk);
    host_en = 0;
    d = host_rdata;
  endtask

  logic [COLS-1:0] x_val [E], w_val [E];

  initial begin
    logic [COLS-1:0] d;
    rst_n = 0; vdd_mv = 16'd0; init = 0; host_mode = 1; host_en = 0; host_we = 0;
    host_instr = 0; host_tile = '0; host_row = '0; host_wdata = '0;
    idle_cycles = 16'd0; sensor_valid = 0;
    build_program();
    prog_len = PC_W'(prog.size());
    res_tile = T0;
    res_row  = ADDR_W'((sig_e[acc[B-1]] >= 0) ? sig_e[acc[B-1]] : sig_o[acc[B-1]]);
    $display("program: %0d instructions, rows used %0d", prog.size(),
             next_even > next_odd ? next_even : next_odd);
    if (prog.size() > NIT * ROWS * IPR) $fatal(1, "program too long");
    repeat (3) @(negedge clk);
    vdd_mv = 16'd1200; rst_n = 1;
    init = 1; @(negedge clk); init = 0;
    for (int r = 0; r * IPR < prog.size(); r++) begin
      d = '0;
      for (int s = 0; s < IPR; s++)
        if (r * IPR + s < prog.size()) d[64 * s +: 64] = prog[r * IPR + s];
      host_write(1, 0, r, d);
    end
    for (int j = 0; j < int'(E); j++) begin
      w_val[j] = {(COLS / 32){$urandom}};
      x_val[j] = {(COLS / 32){$urandom}};
      sensor_mem[j] = x_val[j];
      host_write(0, 0, sig_e[w_sig[j]], w_val[j]);
    end
    host_mode = 0;
    repeat (10) @(negedge clk);
    sensor_valid = 1;
    while (n_tx == 0) begin
      repeat (200 + $urandom % 800) @(negedge clk);
      if (n_tx != 0) break;
      vdd_mv = 16'd300;
      n_cuts++;
      repeat (1 + $urandom % 6) @(negedge clk);
      vdd_mv = 16'd1200;
    end
    repeat (5) @(negedge clk);
    host_mode = 1;
    @(negedge clk);
    for (int b = 0; b < int'(B); b++) begin
      logic [COLS-1:0] e;
      for (int c = 0; c < int'(COLS); c++) begin
        int cnt;
        cnt = 0;
        for (int j = 0; j < int'(E); j++) cnt += int'(x_val[j][c] & w_val[j][c]);
        e[c] = cnt[b];
      end
      host_read(0, (sig_e[acc[b]] >= 0) ? sig_e[acc[b]] : sig_o[acc[b]], d);
      checks++;
      if (d !== e) fail($sformatf("counter bit %0d", b));
      if (b == int'(B) - 1) begin
        checks++;
        if (last_tx !== e) fail("transmitted counter bit");
      end
    end
    checks++;
    if (par_err) fail("row parity error");
    begin
      int mech [string];
      mech["binarized multiply (AND)"] = n_and;
      mech["NAND"] = n_nand;
      mech["COPY across parity"] = n_copy;
      mech["sensor-to-tile transfer"] = n_sensor;
      mech["supply cut"] = n_cuts;
      mech["restore (re-activate columns)"] = n_restore;
      mech["result out"] = n_tx;
      foreach (mech[m]) begin
        $display("MECH %-30s %0d", m, mech[m]);
        checks++;
        if (mech[m] == 0) fail($sformatf("mechanism never happened: %s", m));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
