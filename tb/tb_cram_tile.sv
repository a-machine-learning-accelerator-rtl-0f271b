// tb_cram_tile -- self-checking test of one CRAM tile.
//
// A reference model of the tile (array, active-column set, STT gate rules
// written as preset/switch truth tables) runs alongside the RTL. The test
// loads the array through port B, then issues a random mix of Activate
// Columns (list and bulk range; to this tile, to another tile, broadcast),
// presets, line writes, reads and all six gates with both legal and illegal
// row parities. It checks every READ's data, the latency of every command
// (busy for number-of-addresses + 1 cycles), par_err on illegal parities,
// that commands to another tile do nothing here, that a power loss clears
// the column latch but not the array, and finally the whole array.
module tb_cram_tile;
  import master_pkg::*;

  localparam int ROWS = 32, COLS = 64;
  localparam logic [TILE_W-1:0] ME = 9'd5;

  logic              clk = 0, rst_n = 0;
  cmd_t              cmd;
  logic [COLS-1:0]   wdata, rd_data, act_cols, pb_wdata, pb_rdata;
  logic              busy, rd_valid, par_err, pb_en = 0, pb_we = 0;
  logic [ADDR_W-1:0] pb_row = '0;
  logic [TILE_W-1:0] tile_id = ME;

  logic [COLS-1:0]   ref_mem [ROWS];
  logic [COLS-1:0]   ref_act;
  int                checks = 0, failures = 0;
  int                n_gate = 0, n_perr = 0, n_read = 0, n_act = 0;

  cram_tile #(.ROWS(ROWS), .COLS(COLS)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic truth(opcode_e o, logic x, logic y);
    logic [3:0] t;
    case (o)
      OP_NAND: t = 4'b0111;  OP_AND:  t = 4'b1000;
      OP_NOR:  t = 4'b0001;  OP_OR:   t = 4'b1110;
      OP_NOT:  t = 4'b0011;  OP_COPY: t = 4'b1100;
      default: t = 4'b0000;
    endcase
    return t[{x, y}];
  endfunction

  function automatic logic preset_of(opcode_e o);
    return (o == OP_AND || o == OP_OR || o == OP_COPY);
  endfunction

  task automatic fail(string s);
    failures++;
    if (failures < 15) $display("FAIL %s", s);
  endtask

  // Issue one command and follow it to completion, updating the model.
  task automatic issue(opcode_e op, logic [TILE_W-1:0] tile,
                       int a0, int a1 = 0, int a2 = 0, int a3 = 0, int a4 = 0);
    int nb = 0, expn;
    bit mine, got_rd = 0;
    logic [COLS-1:0] rdv;
    @(negedge clk);
    cmd = '0; cmd.valid = 1; cmd.op = op; cmd.tile = tile;
    cmd.addr[0] = ADDR_W'(a0); cmd.addr[1] = ADDR_W'(a1); cmd.addr[2] = ADDR_W'(a2);
    cmd.addr[3] = ADDR_W'(a3); cmd.addr[4] = ADDR_W'(a4);
    wdata = {$urandom, $urandom};
    @(negedge clk); cmd.valid = 0;
    mine = (tile == ME) || (tile == TILE_BCAST && op != OP_READ);
    expn = (mine || op_class(op) == CLS_ACT) ? op_n_addr(op) + 1 : 0;
    while (busy || rd_valid || par_err) begin
      if (busy) nb++;
      if (rd_valid) begin got_rd = 1; rdv = rd_data; end
      if (par_err) begin
        n_perr++;
      end
      @(negedge clk);
    end
    checks++;
    if (nb != expn) fail($sformatf("%s latency %0d exp %0d", op.name(), nb, expn));
    // model
    if (op_class(op) == CLS_ACT) begin
      logic [COLS-1:0] m = '0;
      n_act++;
      if (mine) begin
        if (op == OP_ACT_LIST) begin
          int l[5] = '{a0, a1, a2, a3, a4};
          foreach (l[k]) if (l[k] < COLS) m[l[k]] = 1'b1;
        end else begin
          for (int c = a0; c <= a1 && c < COLS; c += (a2 == 0 ? 1 : a2)) m[c] = 1'b1;
        end
      end
      ref_act = m;
    end else if (mine) begin
      case (op)
        OP_READ: begin
          n_read++;
          checks++;
          if (!got_rd || rdv !== ref_mem[a0]) fail($sformatf("read row %0d", a0));
        end
        OP_WRITE:   ref_mem[a0] = (wdata & ref_act) | (ref_mem[a0] & ~ref_act);
        OP_PRESET0: ref_mem[a0] = ref_mem[a0] & ~ref_act;
        OP_PRESET1: ref_mem[a0] = ref_mem[a0] |  ref_act;
        default: begin
          int n1 = a0, n2, m;
          bit one = (op == OP_NOT || op == OP_COPY);
          n2 = one ? a0 : a1;
          m  = one ? a1 : a2;
          if ((n1 % 2) == (n2 % 2) && (m % 2) != (n1 % 2)) begin
            n_gate++;
            for (int c = 0; c < COLS; c++)
              if (ref_act[c] && ref_mem[m][c] == preset_of(op))
                ref_mem[m][c] = truth(op, ref_mem[n1][c], ref_mem[n2][c]);
          end
        end
      endcase
    end else begin
      checks++;
      if (got_rd) fail("read answered for another tile");
    end
    checks++;
    if (act_cols !== ref_act) fail($sformatf("active columns after %s", op.name()));
  endtask

  task automatic pb_check_all();
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk); pb_en = 1; pb_we = 0; pb_row = ADDR_W'(r);
      @(negedge clk); pb_en = 0;
      checks++;
      if (pb_rdata !== ref_mem[r]) fail($sformatf("array row %0d", r));
    end
  endtask

  initial begin
    opcode_e gates[6] = '{OP_NAND, OP_AND, OP_NOR, OP_OR, OP_NOT, OP_COPY};
    cmd = '0; wdata = '0; pb_wdata = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    ref_act = '0;
    // load the array through port B
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk); pb_en = 1; pb_we = 1; pb_row = ADDR_W'(r);
      pb_wdata = {$urandom, $urandom}; ref_mem[r] = pb_wdata;
    end
    @(negedge clk); pb_en = 0; pb_we = 0;
    pb_check_all();
    for (int it = 0; it < 600; it++) begin
      automatic int k = $urandom % 10;
      automatic logic [TILE_W-1:0] tl = (it % 9 == 0) ? 9'd3 : ((it % 11 == 0) ? TILE_BCAST : ME);
      case (k)
        0: issue(OP_ACT_LIST, tl, $urandom % COLS, $urandom % COLS, $urandom % COLS,
                 $urandom % COLS, $urandom % COLS);
        1: issue(OP_ACT_RNG, tl, $urandom % 16, 16 + $urandom % 48, $urandom % 4);
        2: issue(OP_PRESET0, tl, $urandom % ROWS);
        3: issue(OP_PRESET1, tl, $urandom % ROWS);
        4: issue(OP_WRITE, tl, $urandom % ROWS);
        5: issue(OP_READ, (it % 2) ? ME : 9'd3, $urandom % ROWS);
        default: begin
          automatic opcode_e g = gates[$urandom % 6];
          automatic int n1 = $urandom % ROWS;
          int n2, m;
          if (it % 8 == 0) begin            // any rows, parity maybe illegal
            n2 = $urandom % ROWS; m = $urandom % ROWS;
          end else begin
            n2 = ((($urandom % ROWS) & ~1) | (n1 & 1)) % ROWS;
            m  = ((($urandom % ROWS) & ~1) | (~n1 & 1)) % ROWS;
          end
          // preset the output first in half the cases (the STT discipline)
          if (it % 2 == 0) begin
            automatic int mm = (g == OP_NOT || g == OP_COPY) ? n2 : m;
            issue(preset_of(g) ? OP_PRESET1 : OP_PRESET0, tl, mm);
          end
          if (g == OP_NOT || g == OP_COPY) issue(g, tl, n1, n2);
          else                             issue(g, tl, n1, n2, m);
        end
      endcase
      if (it == 300) begin
        // power loss: latch cleared, array kept
        @(negedge clk); rst_n = 0; @(negedge clk); rst_n = 1;
        ref_act = '0;
        checks++;
        if (act_cols !== '0) fail("latch survived power loss");
        pb_check_all();
      end
    end
    pb_check_all();
    checks++;
    if (n_gate < 50 || n_perr == 0 || n_read == 0 || n_act == 0) fail("coverage");
    $display("gates=%0d parity_errors=%0d reads=%0d activations=%0d", n_gate, n_perr, n_read, n_act);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
