// tb_coef_buffer: writes the sixteen 32-bit entries, checks the parallel
// outputs, and reads each back over the bus port (one-cycle latency).
module tb_coef_buffer;
  logic clk = 0, rst_n = 0, we = 0, re = 0;
  logic [3:0] addr = '0;
  logic [31:0] wdata = '0, rdata;
  logic [15:0][31:0] q;
  logic [31:0] model [16];
  int checks = 0, failures = 0;

  coef_buffer dut (.clk, .rst_n, .we, .re, .addr, .wdata, .rdata, .q);
  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 2; round++) begin
      for (int i = 0; i < 16; i++) begin
        model[i] = $urandom;
        @(negedge clk); we = 1; addr = 4'(i); wdata = model[i];
      end
      @(negedge clk); we = 0;
      for (int i = 0; i < 16; i++) begin
        checks++;
        if (q[i] !== model[i]) begin failures++; $display("q[%0d]", i); end
        @(negedge clk); re = 1; addr = 4'(i);
        @(negedge clk); re = 0;
        checks++;
        if (rdata !== model[i]) begin failures++; $display("rdata[%0d]", i); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
