// tb_quant_logic: random sums, biases, scales and shifts; the expected int8
// value is computed with real arithmetic, round((acc + bias) * scale / 2^shift)
// with halves rounded up, then clamped to [-128, 127]. Values are kept small
// enough for the real numbers to be exact. Also checks the one-cycle register.
module tb_quant_logic;
  logic clk = 0, rst_n = 0, en = 0;
  logic [15:0][31:0] acc, bias, scale;
  logic [5:0] shift;
  logic [15:0][7:0] q;
  int checks = 0, failures = 0, sat = 0;

  quant_logic dut (.clk, .rst_n, .en, .acc, .bias, .scale, .shift, .q);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int expected(int a, int b, int s, int sh);
    real v;
    int r;
    v = $floor((real'(a) + real'(b)) * real'(s) / (2.0 ** sh) + 0.5);
    if (v > 127.0) return 127;
    if (v < -128.0) return -128;
    r = int'(v);
    return r;
  endfunction

  initial begin
    acc = '0; bias = '0; scale = '0; shift = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      shift = 6'($urandom_range(0, 30));
      for (int i = 0; i < 16; i++) begin
        acc[i]   = 32'($signed($urandom_range(0, 1 << 21)) - (1 << 20));
        bias[i]  = 32'($signed($urandom_range(0, 1 << 13)) - (1 << 12));
        scale[i] = 32'($signed($urandom_range(0, 1 << 16)) - (1 << 15));
      end
      en = 1;
      @(negedge clk); en = 0;
      for (int i = 0; i < 16; i++) begin
        int e, got;
        e = expected($signed(acc[i]), $signed(bias[i]), $signed(scale[i]), int'(shift));
        got = int'($signed(q[i]));
        if (e == 127 || e == -128) sat++;
        checks++;
        if (got != e) begin
          failures++;
          if (failures < 10) $display("lane %0d acc %0d bias %0d scale %0d sh %0d -> %0d expected %0d",
                                      i, $signed(acc[i]), $signed(bias[i]), $signed(scale[i]), shift, got, e);
        end
      end
    end
    checks++;
    if (sat == 0) begin failures++; $display("saturation never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
