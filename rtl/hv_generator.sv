// hv_generator: behavioural model of the logic-compatible high-voltage pump.
// It stands for an analog circuit (six voltage-doubler stages, clock generator,
// voltage detector, SREF comparator and cascaded PMOS switches); voltages are
// integers in mV and one clock of clk is one pump clock.
//
// While en is high the clock generator runs and each clock raises VPP4 by
// STEP_MV until the voltage detector sees VPP4 at VPP4_MV; it then stops the
// clock and VPP4 droops by LEAK_MV per cycle, which restarts it (regulation).
// With en low the pump is off and VPP4 discharges by DISCH_MV per cycle.
// VPP1..VPP3 sit at 1/4, 2/4 and 3/4 of VPP4. While VPP1 is above SREF the
// switches connect VPS1..4 to VPP1..4; below SREF they connect them to VDDH.
// ready is high while VPP4 is within one step of the regulation level.
// VDDH = 2.5 V, about 10 V at VPP4, six stages and the SREF switch-over are
// the chip's; ramp, droop and discharge rates are this model's choices.
module hv_generator #(
  parameter int unsigned VDDH_MV  = 2500,
  parameter int unsigned VPP4_MV  = 10000,
  parameter int unsigned STAGES   = 6,
  parameter int unsigned SREF_MV  = 1250,
  parameter int unsigned STEP_MV  = 500,
  parameter int unsigned LEAK_MV  = 20,
  parameter int unsigned DISCH_MV = 1000
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             en,
  output logic [3:0][15:0] vpp_mv,
  output logic [3:0][15:0] vps_mv,
  output logic             clk_on,
  output logic             ready
);

  localparam int unsigned VMAX_MV = (STAGES + 1) * VDDH_MV; // unloaded limit

  logic [15:0] vpp4;

  // Voltage detector gating the clock generator.
  assign clk_on = en && (vpp4 < 16'(VPP4_MV));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vpp4 <= '0;
    else if (clk_on)
      vpp4 <= (vpp4 + 16'(STEP_MV) > 16'(VMAX_MV)) ? 16'(VMAX_MV) : vpp4 + 16'(STEP_MV);
    else if (en)
      vpp4 <= vpp4 - 16'(LEAK_MV);
    else
      vpp4 <= (vpp4 > 16'(DISCH_MV)) ? vpp4 - 16'(DISCH_MV) : '0;
  end

  always_comb begin
    for (int i = 0; i < 4; i++) begin
      vpp_mv[i] = 16'((32'(vpp4) * (i + 1)) / 4);
      vps_mv[i] = (vpp_mv[0] > 16'(SREF_MV)) ? vpp_mv[i] : 16'(VDDH_MV);
    end
    ready = en && (32'(vpp4) + STEP_MV >= VPP4_MV);
  end

endmodule
