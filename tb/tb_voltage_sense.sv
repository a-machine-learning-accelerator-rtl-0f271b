// tb_voltage_sense -- self-checking test of the supply monitor model.
//
// Sweeps the supply up and down through both thresholds and checks the
// hysteresis: power good rises only at or above V_ON_MV, falls only below
// V_OFF_MV, and holds its value in between. Reference: a direct statement of
// those two rules, evaluated step by step in the testbench.
module tb_voltage_sense;
  localparam int unsigned VON = 1000, VOFF = 900;

  logic [15:0] vdd_mv = '0;
  logic        power_good;
  logic        exp_pg = 1'b0;
  int          checks = 0, failures = 0;

  voltage_sense #(.V_ON_MV(VON), .V_OFF_MV(VOFF)) dut (.vdd_mv, .power_good);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic step(int v);
    vdd_mv = 16'(v);
    if (v >= int'(VON)) exp_pg = 1'b1;
    else if (v < int'(VOFF)) exp_pg = 1'b0;
    #1;
    checks++;
    if (power_good !== exp_pg) begin
      failures++;
      $display("FAIL vdd=%0d pg=%b exp=%b", v, power_good, exp_pg);
    end
  endtask

  initial begin
    #1;
    checks++;
    if (power_good !== 1'b0) failures++;
    for (int v = 0; v <= 1200; v += 10) step(v);       // ramp up
    for (int v = 1200; v >= 0; v -= 10) step(v);       // ramp down
    for (int i = 0; i < 500; i++) step(800 + ($urandom % 300));
    // specifically: in the band the output depends on history
    step(1000); step(950); checks++; if (power_good !== 1'b1) failures++;
    step(899);  step(950); checks++; if (power_good !== 1'b0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
