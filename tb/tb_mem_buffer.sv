// tb_mem_buffer -- self-checking test of the line buffer.
//
// Plays the data tiles (one-cycle rd_valid pulses with a row) and the sensor
// (answers sensor_rd_en with the requested row one cycle later) and checks
// that the buffer holds the last line delivered, that a sensor READ requests
// the right row exactly one cycle after the command and lands two cycles
// later, that non-READ commands leave the line alone, and that the line
// survives a power loss (non-volatile).
module tb_mem_buffer;
  import master_pkg::*;

  localparam int NT = 4, COLS = 64;

  logic             clk = 0, rst_n = 0;
  cmd_t             cmd;
  logic [NT-1:0]    tile_rd_valid;
  logic [COLS-1:0]  tile_rd_data [NT];
  logic             sensor_rd_en;
  logic [ADDR_W-1:0] sensor_rd_row;
  logic [COLS-1:0]  sensor_rd_data;
  logic [COLS-1:0]  line;
  logic [COLS-1:0]  sensor_mem [16];
  int               checks = 0, failures = 0, sens_reads = 0;

  mem_buffer #(.N_TILES(NT), .COLS(COLS)) dut (.*);

  always #5 clk = ~clk;

  // sensor buffer model: 1-cycle read latency
  always_ff @(posedge clk) if (sensor_rd_en) begin
    sensor_rd_data <= sensor_mem[sensor_rd_row[3:0]];
    sens_reads++;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_line(string what, logic [COLS-1:0] exp);
    checks++;
    if (line !== exp) begin
      failures++; $display("FAIL %s line=%h exp=%h", what, line, exp);
    end
  endtask

  initial begin
    cmd = '0; tile_rd_valid = '0;
    foreach (tile_rd_data[t]) tile_rd_data[t] = '0;
    foreach (sensor_mem[i]) sensor_mem[i] = {$urandom, $urandom};
    repeat (2) @(negedge clk); rst_n = 1;
    for (int it = 0; it < 100; it++) begin
      if (it % 3 == 0) begin
        // tile read: one tile answers
        automatic int t = $urandom % NT;
        automatic logic [COLS-1:0] v = {$urandom, $urandom};
        foreach (tile_rd_data[k]) tile_rd_data[k] = {$urandom, $urandom};
        tile_rd_data[t] = v;
        @(negedge clk); tile_rd_valid[t] = 1;
        @(negedge clk); tile_rd_valid = '0;
        expect_line("tile", v);
      end else if (it % 3 == 1) begin
        // sensor read
        automatic int r = $urandom % 16;
        @(negedge clk);
        cmd = '0; cmd.valid = 1; cmd.op = OP_READ; cmd.tile = TILE_SENSOR; cmd.addr[0] = ADDR_W'(r);
        @(negedge clk); cmd.valid = 0;
        checks++;
        if (!sensor_rd_en || sensor_rd_row != ADDR_W'(r)) begin
          failures++; $display("FAIL sensor request en=%b row=%0d", sensor_rd_en, sensor_rd_row);
        end
        @(negedge clk); @(negedge clk);
        expect_line("sensor", sensor_mem[r]);
      end else begin
        // other commands do not touch the line, power loss keeps it
        logic [COLS-1:0] keep;
        keep = line;
        @(negedge clk);
        cmd = '0; cmd.valid = 1; cmd.op = OP_WRITE; cmd.tile = TILE_SENSOR;
        @(negedge clk); cmd.valid = 0; rst_n = 0;
        repeat (3) @(negedge clk); rst_n = 1;
        @(negedge clk);
        expect_line("hold", keep);
      end
    end
    checks++;
    if (sens_reads == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
