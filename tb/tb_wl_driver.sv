// tb_wl_driver: program, program-verify and read settings of the word-line
// driver model. Program (SWR1, SWR2 high) must put VPS4 on the word line;
// SRD high must put VRD on it for every level from 0 to 2.5 V, with no
// threshold drop, and clip above VDDH; idle must ground it.
module tb_wl_driver;
  logic swr1, swr2, en, srd, prog_path;
  logic [15:0] vps4_mv, vrd_mv, wl_mv;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  wl_driver dut (.swr1, .swr2, .en, .srd, .vps4_mv, .vrd_mv, .wl_mv, .prog_path);

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input int exp_mv, input string what);
    #1;
    checks++;
    if (int'(wl_mv) != exp_mv) begin failures++; $display("%s: wl %0d mV expected %0d", what, wl_mv, exp_mv); end
  endtask

  initial begin
    swr1 = 0; swr2 = 0; en = 0; srd = 0; vps4_mv = 16'd2500; vrd_mv = 16'd0;
    check(0, "idle");
    // program
    vps4_mv = 16'd10000; swr1 = 1; swr2 = 1; en = 1;
    check(10000, "program");
    swr2 = 0;
    check(0, "only SWR1");
    swr1 = 0; en = 0;
    // verify / read levels from 0 to 2.5 V
    for (int mv = 0; mv <= 2500; mv += 100) begin
      vrd_mv = 16'(mv); srd = 1;
      check(mv, "verify level");
      srd = 0;
      check(0, "discharge");
    end
    vrd_mv = 16'd3000; srd = 1;
    check(2500, "clip at VDDH");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
