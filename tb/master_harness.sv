// master_harness -- end-to-end driver and checker for master_top.
//
// Used by tb_master_top and tb_master_duty (reduced size) and by
// tb_master_full (default size). Host accesses are one-cycle requests on the
// falling clock edge; reads return data one cycle later.
// It plays the host that programs the chip before deployment, the sensor
// with its non-volatile input buffer and valid bit, the transmitter and the
// energy harvester (vdd_mv), and checks the results.
//
// The workload is a bit-serial K-bit addition in every column of data tile
// 0, the kind of integer arithmetic MASTER's SVM kernels are made of: the
// input vector x arrives from the sensor (one bit-plane per row, one element
// per column) and is added to a stored vector w. Each full adder is the
// nine-NAND construction, compiled here by a small generator that respects
// the array's rule that gate inputs share a row parity and the output has
// the other (it inserts preset + COPY pairs where a value is needed on the
// other parity), and presets every STT gate output. The sum bit-planes and
// carry are moved to data tile 1 through the line buffer, and the carry row
// is sent to the transmitter. A second phase activates a column list in
// tile 0 and computes AND, OR, NOR and NOT of x0 and w0 there only, and
// ends with a broadcast-addressed preset.
//
// With DUTY_PERIOD set, the supply is instead a square wave with the given
// period and duty cycle, as in the paper's harvester model.
// Otherwise every inference is run with the supply cut at chosen points of the
// controller's sequence (during the idle wait after a broadcast, during the
// PC write, during the parity write, during a fetch, during the restore) and
// at random points. Afterwards the host reads tiles 0 and 1 back and checks
// them, bit for bit, against values the testbench computes directly
// (x + w, and the gate truth tables). The counts of each mechanism are
// printed; a mechanism that never happened counts as a failure.
module master_harness
  import master_pkg::*;
#(
  parameter int unsigned N_DATA_TILES  = 4,
  parameter int unsigned N_INSTR_TILES = 1,
  parameter int unsigned ROWS          = 128,
  parameter int unsigned COLS          = 256,
  parameter int unsigned PC_W          = 9,
  parameter int unsigned K             = 4,    // bits of the addition
  parameter int unsigned N_INFER       = 2,    // inferences to run
  parameter int unsigned N_CUTS        = 30,   // power cuts per inference
  parameter int unsigned WATCHDOG      = 400000,
  // Square-wave supply (the paper's harvester model): period in clock
  // cycles and on-time in percent. 0 selects targeted cuts instead.
  parameter int unsigned DUTY_PERIOD   = 0,
  parameter int unsigned DUTY_PCT      = 50
) (
  input  logic                 clk,
  output logic                 rst_n,
  output logic [15:0]          vdd_mv,
  output logic                 init,
  output logic                 host_mode,
  output logic                 host_en,
  output logic                 host_we,
  output logic                 host_instr,
  output logic [TILE_W-1:0]    host_tile,
  output logic [ADDR_W-1:0]    host_row,
  output logic [COLS-1:0]      host_wdata,
  input  logic [COLS-1:0]      host_rdata,
  output logic [15:0]          idle_cycles,
  output logic [PC_W-1:0]      prog_len,
  output logic [TILE_W-1:0]    res_tile,
  output logic [ADDR_W-1:0]    res_row,
  output logic                 sensor_valid,
  input  logic                 sensor_clear,
  input  logic                 sensor_rd_en,
  input  logic [ADDR_W-1:0]    sensor_rd_row,
  output logic [COLS-1:0]      sensor_rd_data,
  input  logic                 tx_valid,
  input  logic [COLS-1:0]      tx_data,
  input  logic                 power_good,
  input  logic [PC_W-1:0]      pc,
  input  logic                 parity,
  input  logic                 restore_evt,
  input  logic                 par_err,
  input  logic [3:0]           ctrl_state,
  input  cmd_t                 bcast_cmd
);

  localparam int IPR = COLS / 64;
  // controller state encodings (mem_controller state_e)
  localparam int ST_RESTORE_W = 2, ST_FETCH_W = 4, ST_INPUT = 5, ST_IDLE = 7,
                 ST_UPD_PC_W = 11, ST_FLIP_W = 13;

  int checks = 0, failures = 0;

  task automatic fail(string s);
    failures++;
    if (failures < 20) $display("FAIL %s", s);
  endtask

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    fail("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------------
  // Program generator
  // ------------------------------------------------------------------
  logic [63:0] prog [$];
  int          sig_e [$], sig_o [$];      // row of each value's even / odd copy (-1: none)
  int          next_even, next_odd;
  localparam logic [TILE_W-1:0] T0 = 9'd0, T1 = 9'd1;

  function automatic void emit(opcode_e op, logic [TILE_W-1:0] t, int a1, int a2 = 0,
                               int a3 = 0, int a4 = 0, int a5 = 0);
    prog.push_back(encode(op, t, ADDR_W'(a1), ADDR_W'(a2), ADDR_W'(a3), ADDR_W'(a4), ADDR_W'(a5)));
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

  // row holding value v on parity p (copying it across if needed)
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

  function automatic int g_nand(int v1, int v2);
    int p, r1, r2, ro;
    p  = (sig_e[v1] >= 0) ? 0 : 1;
    r1 = get_row(v1, p);
    r2 = get_row(v2, p);
    ro = alloc(1 - p);
    emit(OP_PRESET0, T0, ro);
    emit(OP_NAND, T0, r1, r2, ro);
    return new_sig(ro);
  endfunction

  int x_sig [K], w_sig [K], s_sig [K], carry_sig;
  int flag_row [4];       // AND, OR, NOR, NOT results in tile 0
  int bcast_row;          // row preset by a broadcast-addressed instruction
  int list_cols [5] = '{1, 3, 5, 8, 13};

  function automatic void build_program();
    int c, t1, t2, t3, s1, t4, t5, t6;
    next_even = 0; next_odd = 1;
    prog.delete(); sig_e.delete(); sig_o.delete();
    for (int k = 0; k < int'(K); k++) x_sig[k] = new_sig(alloc(0));
    for (int k = 0; k < int'(K); k++) w_sig[k] = new_sig(alloc(0));
    // all columns of all data tiles active (bulk range)
    emit(OP_ACT_RNG, TILE_BCAST, 0, COLS - 1, 0);
    // input transfer: sensor -> buffer -> tile 0
    for (int k = 0; k < int'(K); k++) begin
      emit(OP_READ, TILE_SENSOR, k);
      emit(OP_WRITE, T0, sig_e[x_sig[k]]);
    end
    // carry-in 0
    c = new_sig(alloc(0));
    emit(OP_PRESET0, T0, sig_e[c]);
    // ripple-carry addition, 9 NANDs per bit
    for (int k = 0; k < int'(K); k++) begin
      t1 = g_nand(x_sig[k], w_sig[k]);
      t2 = g_nand(x_sig[k], t1);
      t3 = g_nand(w_sig[k], t1);
      s1 = g_nand(t2, t3);            // x xor w
      t4 = g_nand(s1, c);
      t5 = g_nand(s1, t4);
      t6 = g_nand(c, t4);
      s_sig[k] = g_nand(t5, t6);      // sum
      c = g_nand(t1, t4);             // carry out
    end
    carry_sig = c;
    // tile-to-tile transfer of the result: tile 0 -> buffer -> tile 1
    for (int k = 0; k <= int'(K); k++) begin
      int v = (k == int'(K)) ? carry_sig : s_sig[k];
      int r = (sig_e[v] >= 0) ? sig_e[v] : sig_o[v];
      emit(OP_READ, T0, r);
      emit(OP_WRITE, T1, k);
    end
    // column-list phase in tile 0 only
    emit(OP_ACT_LIST, T0, list_cols[0], list_cols[1], list_cols[2], list_cols[3], list_cols[4]);
    for (int g = 0; g < 4; g++) begin
      opcode_e op = (g == 0) ? OP_AND : (g == 1) ? OP_OR : (g == 2) ? OP_NOR : OP_NOT;
      flag_row[g] = alloc(1);
      emit((op == OP_AND || op == OP_OR) ? OP_PRESET1 : OP_PRESET0, T0, flag_row[g]);
      if (op == OP_NOT) emit(op, T0, sig_e[x_sig[0]], flag_row[g]);
      else              emit(op, T0, sig_e[x_sig[0]], sig_e[w_sig[0]], flag_row[g]);
    end
    bcast_row = alloc(0);
    emit(OP_PRESET1, TILE_BCAST, bcast_row);
  endfunction

  // ------------------------------------------------------------------
  // Sensor model: non-volatile input buffer with a valid bit
  // ------------------------------------------------------------------
  logic [COLS-1:0] sensor_mem [K];
  always_ff @(posedge clk) begin
    if (sensor_rd_en)
      sensor_rd_data <= (32'(sensor_rd_row) < K) ? sensor_mem[sensor_rd_row] : '0;
    if (sensor_clear) sensor_valid <= 1'b0;
  end

  // ------------------------------------------------------------------
  // Mechanism counters
  // ------------------------------------------------------------------
  int n_restore = 0, n_tx = 0, n_sensor_wait = 0, n_sensor_rd = 0, n_t2t = 0;
  int n_op [16];
  int n_bcast_tile = 0, n_cut_idle = 0, n_cut_pc = 0, n_cut_flip = 0, n_cut_fetch = 0;
  int n_cut_restore = 0, n_repeat = 0, n_idle_gap = 0, n_wave_off = 0;
  logic [COLS-1:0] last_tx;
  logic [63:0]     last_instr;
  bit              seen_first;

  initial foreach (n_op[i]) n_op[i] = 0;

  always @(posedge clk) if (rst_n && power_good) begin
    if (restore_evt) n_restore++;
    if (tx_valid) begin n_tx++; last_tx = tx_data; end
    if (ctrl_state == 4'(ST_INPUT) && !sensor_valid) n_sensor_wait++;
    if (sensor_rd_en) n_sensor_rd++;
    if (bcast_cmd.valid && !restore_evt) begin
      n_op[bcast_cmd.op]++;
      if (bcast_cmd.tile == TILE_BCAST) n_bcast_tile++;
      if (bcast_cmd.op == OP_WRITE && bcast_cmd.tile == T1) n_t2t++;
      if (idle_cycles != 0) n_idle_gap++;
      if (seen_first && bcast_cmd == last_cmd_q) n_repeat++;
      last_cmd_q = bcast_cmd;
      seen_first = 1;
    end
  end
  cmd_t last_cmd_q;

  // ------------------------------------------------------------------
  // Host access
  // ------------------------------------------------------------------
  task automatic host_write(bit instr, int tile, int row, logic [COLS-1:0] d);
    @(negedge clk);
    host_en = 1; host_we = 1; host_instr = instr; host_tile = TILE_W'(tile);
    host_row = ADDR_W'(row); host_wdata = d;
    @(negedge clk);
    host_en = 0; host_we = 0;
  endtask

  task automatic host_read(bit instr, int tile, int row, output logic [COLS-1:0] d);
    @(negedge clk);
    host_en = 1; host_we = 0; host_instr = instr; host_tile = TILE_W'(tile);
    host_row = ADDR_W'(row);
    @(negedge clk);
    host_en = 0;
    d = host_rdata;
  endtask

  task automatic power_cut(int off);
    @(negedge clk);
    vdd_mv = 16'd300;
    repeat (off) @(negedge clk);
    vdd_mv = 16'd1200;
  endtask

  // cut the supply when the controller reaches state st (or give up)
  task automatic cut_in_state(int st, int extra, ref int counter);
    int n = 0;
    while (ctrl_state != 4'(st) && n < 4000) begin @(negedge clk); n++; end
    if (ctrl_state == 4'(st)) begin
      logic [PC_W-1:0] pc_before, pc_after_commit;
      repeat (extra) @(negedge clk);
      pc_before = pc;
      pc_after_commit = (pc_before >= prog_len - 1'b1) ? '0 : pc_before + 1'b1;
      if (ctrl_state == 4'(st)) counter++;
      power_cut(2 + $urandom % 3);
      // a cut leaves the valid PC at the old value or the committed next one
      checks++;
      if (pc != pc_before && pc != pc_after_commit)
        fail($sformatf("valid PC corrupted by a cut: %0d -> %0d", pc_before, pc));
    end
  endtask

  // ------------------------------------------------------------------
  // Main sequence
  // ------------------------------------------------------------------
  logic [COLS-1:0] t0_init [ROWS];
  logic [COLS-1:0] t1_init [ROWS];
  logic [COLS-1:0] x_val [K], w_val [K];

  initial begin
    logic [COLS-1:0] d, e;
    rst_n = 0; vdd_mv = 16'd0; init = 0; host_mode = 1; host_en = 0; host_we = 0;
    host_instr = 0; host_tile = '0; host_row = '0; host_wdata = '0;
    idle_cycles = 16'd2; res_tile = T1; res_row = ADDR_W'(K); sensor_valid = 0;
    seen_first = 0; last_cmd_q = '0;
    build_program();
    prog_len = PC_W'(prog.size());
    $display("program: %0d instructions, rows used %0d/%0d", prog.size(),
             (next_even > next_odd ? next_even : next_odd), ROWS);
    if (prog.size() > N_INSTR_TILES * ROWS * IPR) $fatal(1, "program too long");
    repeat (3) @(negedge clk);
    vdd_mv = 16'd1200; rst_n = 1;
    // factory initialisation and loading (host mode)
    init = 1; @(negedge clk); init = 0;
    for (int r = 0; r * IPR < prog.size(); r++) begin
      d = '0;
      for (int s = 0; s < IPR; s++)
        if (r * IPR + s < prog.size()) d[64 * s +: 64] = prog[r * IPR + s];
      host_write(1, r / ROWS, r % ROWS, d);
    end
    for (int r = 0; r < int'(ROWS); r++) begin
      t0_init[r] = {(COLS / 32){$urandom}};
      t1_init[r] = {(COLS / 32){$urandom}};
    end
    for (int k = 0; k < int'(K); k++) w_val[k] = {(COLS / 32){$urandom}};
    for (int k = 0; k < int'(K); k++) t0_init[sig_e[w_sig[k]]] = w_val[k];
    for (int r = 0; r < int'(ROWS); r++) begin
      host_write(0, 0, r, t0_init[r]);
      host_write(0, 1, r, t1_init[r]);
    end
    // read-back of the program
    for (int r = 0; r * IPR < prog.size(); r++) begin
      host_read(1, r / ROWS, r % ROWS, d);
      checks++;
      for (int s = 0; s < IPR; s++)
        if (r * IPR + s < prog.size() && d[64 * s +: 64] !== prog[r * IPR + s])
          fail($sformatf("instruction readback row %0d", r));
    end

    for (int inf = 0; inf < int'(N_INFER); inf++) begin
      int tx_before;
      tx_before = n_tx;
      // new input
      for (int k = 0; k < int'(K); k++) begin
        x_val[k] = {(COLS / 32){$urandom}};
        sensor_mem[k] = x_val[k];
      end
      host_mode = 0;
      repeat (20) @(negedge clk);     // controller waits for the valid bit
      sensor_valid = 1;
      // square-wave supply until the result is out
      if (DUTY_PERIOD != 0) begin
        while (n_tx == tx_before) begin
          repeat (DUTY_PERIOD * DUTY_PCT / 100) @(negedge clk);
          if (n_tx != tx_before) break;
          vdd_mv = 16'd300;
          n_wave_off++;
          repeat (DUTY_PERIOD - DUTY_PERIOD * DUTY_PCT / 100) @(negedge clk);
          vdd_mv = 16'd1200;
        end
      end
      // targeted and random power cuts while the inference runs
      for (int k = 0; k < int'(N_CUTS) && DUTY_PERIOD == 0 && n_tx == tx_before; k++) begin
        case (k % 6)
          0: cut_in_state(ST_IDLE,      $urandom % 4, n_cut_idle);
          1: cut_in_state(ST_UPD_PC_W,  $urandom % 2, n_cut_pc);
          2: cut_in_state(ST_FLIP_W,    0,            n_cut_flip);
          3: cut_in_state(ST_FETCH_W,   0,            n_cut_fetch);
          4: begin
            power_cut(2);
            cut_in_state(ST_RESTORE_W, $urandom % 4, n_cut_restore);
          end
          default: begin
            repeat ($urandom % 60) @(negedge clk);
            power_cut(1 + $urandom % 5);
          end
        endcase
        repeat ($urandom % 30) @(negedge clk);
      end
      while (n_tx == tx_before) @(negedge clk);
      repeat (5) @(negedge clk);
      checks++;
      if (sensor_valid) fail("input not consumed");
      // check the transmitted carry row and the tiles' contents
      host_mode = 1;
      @(negedge clk);
      begin
        logic [COLS-1:0] sum_exp [K + 1];
        for (int col = 0; col < int'(COLS); col++) begin
          int xv, wv, sv;
          xv = 0; wv = 0;
          for (int k = 0; k < int'(K); k++) begin
            xv |= int'(x_val[k][col]) << k;
            wv |= int'(w_val[k][col]) << k;
          end
          sv = xv + wv;
          for (int k = 0; k <= int'(K); k++) sum_exp[k][col] = sv[k];
        end
        checks++;
        if (last_tx !== sum_exp[K]) fail($sformatf("transmitted carry row, inference %0d", inf));
        for (int k = 0; k <= int'(K); k++) begin
          host_read(0, 1, k, d);
          checks++;
          if (d !== sum_exp[k]) fail($sformatf("sum bit %0d in tile 1, inference %0d", k, inf));
        end
        for (int k = 0; k < int'(K); k++) begin
          host_read(0, 0, sig_e[x_sig[k]], d);
          checks++;
          if (d !== x_val[k]) fail($sformatf("input bit-plane %0d in tile 0", k));
        end
        // column-list phase: only the listed columns computed
        for (int g = 0; g < 4; g++) begin
          host_read(0, 0, flag_row[g], d);
          e = d;
          foreach (list_cols[i]) begin
            logic xa, wb;
            xa = x_val[0][list_cols[i]];
            wb = w_val[0][list_cols[i]];
            e[list_cols[i]] = (g == 0) ? (xa & wb) : (g == 1) ? (xa | wb) :
                              (g == 2) ? ~(xa | wb) : ~xa;
          end
          checks++;
          if (inf == 0) begin
            // unlisted columns keep the value the host loaded
            for (int col = 0; col < int'(COLS); col++) begin
              bit listed;
              listed = 0;
              foreach (list_cols[i]) if (list_cols[i] == col) listed = 1;
              if (!listed) e[col] = t0_init[flag_row[g]][col];
            end
          end
          if (d !== e) fail($sformatf("column-list gate %0d in tile 0, inference %0d", g, inf));
        end
        // broadcast preset: only tile 0's listed columns were active
        host_read(0, 0, bcast_row, d);
        e = (inf == 0) ? t0_init[bcast_row] : d;
        foreach (list_cols[i]) e[list_cols[i]] = 1'b1;
        checks++;
        if (d !== e) fail("broadcast preset in tile 0");
        host_read(0, 1, bcast_row, d);
        checks++;
        if (inf == 0 && d !== t1_init[bcast_row]) fail("broadcast preset leaked into inactive tile 1");
      end
      checks++;
      if (par_err) fail("row parity error");
    end

    // every mechanism must have happened
    begin
      int mech [string];
      mech["restore (re-activate columns)"] = n_restore;
      mech["repeated instruction after a cut"] = n_repeat;
      if (DUTY_PERIOD == 0) begin
        mech["cut during idle wait"] = n_cut_idle;
        mech["cut during PC write"] = n_cut_pc;
        mech["cut during parity write"] = n_cut_flip;
        mech["cut during fetch"] = n_cut_fetch;
        mech["cut during restore"] = n_cut_restore;
      end else begin
        mech["square-wave outage"] = n_wave_off;
      end
      mech["wait for sensor valid"] = n_sensor_wait;
      mech["sensor-to-tile transfer"] = n_sensor_rd;
      mech["tile-to-tile transfer"] = n_t2t;
      mech["broadcast tile address"] = n_bcast_tile;
      mech["activate list"] = n_op[OP_ACT_LIST];
      mech["activate range"] = n_op[OP_ACT_RNG];
      mech["preset 0"] = n_op[OP_PRESET0];
      mech["preset 1"] = n_op[OP_PRESET1];
      mech["NAND"] = n_op[OP_NAND];
      mech["AND"] = n_op[OP_AND];
      mech["OR"] = n_op[OP_OR];
      mech["NOR"] = n_op[OP_NOR];
      mech["NOT"] = n_op[OP_NOT];
      mech["COPY"] = n_op[OP_COPY];
      mech["program wrap and result out"] = n_tx;
      mech["idle gap between instructions"] = n_idle_gap;
      foreach (mech[m]) begin
        $display("MECH %-34s %0d", m, mech[m]);
        checks++;
        if (mech[m] == 0) fail($sformatf("mechanism never happened: %s", m));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
