// tb_master_duty -- MASTER under a square-wave harvested supply.
//
// The paper evaluates MASTER with the harvester modelled as a square wave
// that is on for a fraction (the duty cycle) of each period, with the chip
// idling between instructions to stay within the power budget. This test
// runs the end-to-end harness (master_harness) that way at a reduced size:
// the supply is on for 30 % of every 400-cycle period and idle_cycles = 2,
// so an inference spans dozens of outages, each followed by a column
// restore and at most one repeated instruction. The results in the tiles
// and at the transmitter are checked bit for bit, and the harness counts
// every mechanism, failing any that never happened.
module tb_master_duty;
  import master_pkg::*;

  localparam int unsigned NDT = 4, NIT = 1, ROWS = 128, COLS = 256;
  localparam int unsigned PC_W = $clog2(NIT * ROWS * (COLS / INSTR_W));

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

  master_harness #(
    .N_DATA_TILES (NDT), .N_INSTR_TILES (NIT), .ROWS (ROWS), .COLS (COLS),
    .PC_W (PC_W), .K (4), .N_INFER (2), .DUTY_PERIOD (400), .DUTY_PCT (30)
  ) u_h (.*);

  // Outer watchdog, in case the harness itself never reaches its end.
  initial begin
    repeat (500000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", u_h.checks, u_h.failures + 1);
    $finish;
  end

endmodule
