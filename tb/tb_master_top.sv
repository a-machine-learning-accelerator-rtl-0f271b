// tb_master_top -- end-to-end test of MASTER at a reduced size.
//
// Four 128 x 256 data tiles and one instruction tile, so that the whole
// program and the host loading and checking run in well under a minute.
// master_harness drives the chip: it loads a bit-serial addition program
// and its operand, feeds sensor input, cuts the supply many times at chosen
// points of the controller's sequence, and checks the results in the tiles
// and at the transmitter against directly computed values, counting every
// mechanism of the design (see master_harness).
module tb_master_top;
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
    .PC_W (PC_W), .K (4), .N_INFER (3), .N_CUTS (60)
  ) u_h (.*);

endmodule
