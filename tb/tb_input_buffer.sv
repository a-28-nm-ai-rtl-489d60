// tb_input_buffer: writes all 256 words of the input buffer over the bus port,
// reads them back (data one cycle after the request) and checks each of the
// eight 128-byte segments seen by the input fetcher.
module tb_input_buffer;
  logic clk = 0, rst_n = 0, we = 0, re = 0;
  logic [7:0] addr = '0;
  logic [31:0] wdata = '0, rdata;
  logic [2:0] seg = '0;
  logic [1023:0] vec;
  logic [31:0] model [256];
  int checks = 0, failures = 0;

  input_buffer dut (.clk, .rst_n, .we, .re, .addr, .wdata, .rdata, .seg, .vec);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 256; i++) begin
      model[i] = $urandom;
      @(negedge clk); we = 1; addr = 8'(i); wdata = model[i];
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < 256; i++) begin
      @(negedge clk); re = 1; addr = 8'(i);
      @(negedge clk); re = 0;
      checks++;
      if (rdata !== model[i]) begin failures++; $display("word %0d %h expected %h", i, rdata, model[i]); end
    end
    for (int s = 0; s < 8; s++) begin
      seg = 3'(s); #1;
      for (int j = 0; j < 32; j++) begin
        checks++;
        if (vec[j*32 +: 32] !== model[s*32 + j]) begin failures++; $display("seg %0d word %0d", s, j); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
