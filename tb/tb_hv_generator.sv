// tb_hv_generator: enables the pump model and checks that VPP4 reaches the
// regulation level (about 10 V) in the expected number of pump clocks, that the
// detector then gates the clock and holds VPP4 within one step, that
// VPP1..3 are 1/4..3/4 of VPP4, that VPS1..4 follow VPP1..4 while VPP1 is above
// SREF and fall back to VDDH when the pump is disabled and discharges.
module tb_hv_generator;
  logic clk = 0, rst_n = 0, en = 0, clk_on, ready;
  logic [3:0][15:0] vpp_mv, vps_mv;
  int checks = 0, failures = 0;
  int cyc, gated;

  hv_generator dut (.clk, .rst_n, .en, .vpp_mv, .vps_mv, .clk_on, .ready);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (vpp4 %0d)", what, vpp_mv[3]); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < 4; i++) check(vps_mv[i] == 2500, "pump off: VPS at VDDH");
    en = 1; cyc = 0;
    while (!ready) begin @(negedge clk); cyc++; end
    // 10000 mV / 500 mV per clock = 20 clocks, ready one step early
    check(cyc == 19, $sformatf("ramp took %0d clocks", cyc));
    gated = 0;
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      if (!clk_on) gated++;
      check(vpp_mv[3] >= 9500 && vpp_mv[3] <= 10500, "regulated near 10 V");
      for (int i = 0; i < 4; i++) begin
        check(int'(vpp_mv[i]) == int'(vpp_mv[3]) * (i + 1) / 4, "VPP ladder");
        check(vps_mv[i] == vpp_mv[i], "VPS follows VPP above SREF");
      end
    end
    check(gated > 100, "voltage detector gates the clock");
    en = 0;
    repeat (20) @(negedge clk);
    check(vpp_mv[3] == 0, "discharged");
    for (int i = 0; i < 4; i++) check(vps_mv[i] == 2500, "VPS back to VDDH");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
