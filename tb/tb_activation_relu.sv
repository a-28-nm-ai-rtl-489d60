// tb_activation_relu: random int8 lanes with ReLU on and off; checks each
// byte of the packed write-back word against max(0, x) or x.
module tb_activation_relu;
  logic relu_en;
  logic [15:0][7:0] q;
  logic [127:0] wb;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  activation_relu dut (.relu_en, .q, .wb);

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 50; t++) begin
      relu_en = 1'(t % 2);
      for (int i = 0; i < 16; i++) q[i] = 8'($urandom);
      #1;
      for (int i = 0; i < 16; i++) begin
        int x, e, got;
        x = int'(q[i]); if (x > 127) x -= 256;
        e = (relu_en && x < 0) ? 0 : x;
        got = int'(wb[i*8 +: 8]); if (got > 127) got -= 256;
        checks++;
        if (got != e) begin failures++; $display("lane %0d x %0d got %0d", i, x, got); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
