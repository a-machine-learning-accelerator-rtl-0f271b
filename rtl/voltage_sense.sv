// voltage_sense -- behavioural model of MASTER's supply-voltage monitor.
//
// This is a behavioural model, not synthesizable logic: the real part is an
// analog comparator on the harvested supply, of the standard kind used in
// energy-harvesting systems, which the paper names but does not design. It
// reports power good once the supply (given here as a number in millivolts)
// reaches V_ON_MV and drops it when the supply falls below V_OFF_MV; the
// hysteresis keeps it from chattering. Power good low holds every volatile
// part of MASTER in reset while the non-volatile arrays and registers keep
// their contents. The thresholds are this design's assumption. The output
// follows the input with no delay. Lint reports the hysteresis state `pg`
// as a latch: holding its value between the two thresholds is exactly what
// the comparator does, so the warning stands.
module voltage_sense #(
  parameter int unsigned V_ON_MV  = 1000,
  parameter int unsigned V_OFF_MV = 900
) (
  input  logic [15:0] vdd_mv,
  output logic        power_good
);

  logic pg;

  initial pg = 1'b0;

  always @(vdd_mv) begin
    if (32'(vdd_mv) >= V_ON_MV)     pg = 1'b1;
    else if (32'(vdd_mv) < V_OFF_MV) pg = 1'b0;
  end

  assign power_good = pg;

endmodule
