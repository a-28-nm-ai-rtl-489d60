// tb_pv_controller: runs the program-verify sequence on a row of 256 modelled
// cells with random targets. The cell model raises a pulsed cell's threshold by
// 3 to 6 units; verify level k sits at 16k units. Checks that every cell ends
// at or above its target's level and below the next one, that cells aimed at
// state 0 are never pulsed, that the levels are verified in order 1..15 and
// that a row of erased targets needs no pulse.
module tb_pv_controller;
  localparam int N = 256;
  logic clk = 0, rst_n = 0, start = 0;
  logic [N*4-1:0] target;
  logic vfy_req, vfy_valid, pgm_req, pgm_ack, busy, done;
  logic [3:0] vfy_level;
  logic [N-1:0] vfy_pass, pgm_mask;
  logic [15:0] n_pulses;
  int vth [N];
  int checks = 0, failures = 0;
  int last_level;

  pv_controller dut (.clk, .rst_n, .start, .target, .vfy_req, .vfy_level, .vfy_valid, .vfy_pass,
                     .pgm_req, .pgm_mask, .pgm_ack, .busy, .done, .n_pulses);
  always #5 clk = ~clk;

  // cell array stub: answers a verify or a pulse two cycles after the request
  logic vreq_d, preq_d;
  initial begin vreq_d = 0; preq_d = 0; vfy_valid = 0; pgm_ack = 0; vfy_pass = '0; end
  always @(posedge clk) begin
    vreq_d    <= vfy_req;
    preq_d    <= pgm_req;
    vfy_valid <= vreq_d;
    pgm_ack   <= preq_d;
    if (vreq_d) begin
      if (int'(vfy_level) < last_level) begin failures++; $display("verify levels out of order"); end
      last_level = int'(vfy_level);
      for (int c = 0; c < N; c++) vfy_pass[c] <= vth[c] >= 16 * int'(vfy_level);
    end
    if (preq_d)
      for (int c = 0; c < N; c++)
        if (pgm_mask[c]) begin
          if (target[c*4 +: 4] == 0) begin failures++; $display("cell %0d aimed at 0 pulsed", c); end
          vth[c] += $urandom_range(3, 6);
        end
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    target = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 4; t++) begin
      for (int c = 0; c < N; c++) begin
        vth[c] = $urandom_range(0, 4);
        target[c*4 +: 4] = (t == 3) ? 4'd0 : 4'($urandom);
      end
      last_level = 0;
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      while (!done) @(negedge clk);
      for (int c = 0; c < N; c++) begin
        int s;
        s = int'(target[c*4 +: 4]);
        checks++;
        if (!(vth[c] >= 16 * s && (s == 15 || vth[c] < 16 * (s + 1)) && (s > 0 || vth[c] <= 4))) begin
          failures++;
          if (failures < 10) $display("cell %0d target %0d vth %0d", c, s, vth[c]);
        end
      end
      checks++;
      if (last_level != 15) begin failures++; $display("did not reach S15"); end
      if (t == 3) begin
        checks++;
        if (n_pulses != 0) begin failures++; $display("erased row pulsed"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
