// tb_master_full -- end-to-end test of MASTER at its full default size.
//
// The top is instantiated with no parameter overrides: 240 data tiles and
// 36 instruction tiles of 1024 x 1024 cells (34.5 MB of array). The same
// harness as tb_master_top runs an 8-bit column-parallel addition -- the
// element width of the 8-bit MNIST workload -- across all 1024 columns of a
// data tile, twice, with supply cuts at chosen points of the controller's
// sequence, and checks the tiles and the transmitted result bit for bit.
module tb_master_full;
  import master_pkg::*;

  localparam int unsigned COLS = 1024;
  localparam int unsigned PC_W = $clog2(36 * 1024 * (COLS / INSTR_W));

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

  master_top dut (.*);

  master_harness #(
    .N_DATA_TILES (240), .N_INSTR_TILES (36), .ROWS (1024), .COLS (COLS),
    .PC_W (PC_W), .K (8), .N_INFER (2), .N_CUTS (60)
  ) u_h (.*);

endmodule
