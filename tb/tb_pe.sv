// tb_pe: self-checking test of one processing element at its full 128-element
// width. Random int8 inputs and 4-bit weights; the expected dot products are
// summed in the testbench with plain integers. Checks a cleared first read, two
// accumulated reads, hold while en is low, and the one-cycle result latency.
module tb_pe;
  import nmcu_pkg::*;
  localparam int L = PE_LEN;
  logic clk = 0, rst_n = 0, en = 0, clear = 0;
  logic [L*8-1:0] x;
  logic [L*4-1:0] w;
  logic signed [31:0] acc;
  int checks = 0, failures = 0;
  int expect_acc;

  pe dut (.clk, .rst_n, .en, .clear, .x, .w, .acc);
  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ref_dot();
    int s = 0;
    for (int i = 0; i < L; i++) begin
      int xi, wi;
      xi = int'(x[i*8 +: 8]);   if (xi > 127) xi -= 256;
      wi = int'(w[i*4 +: 4]);   if (wi > 7)   wi -= 16;
      s += xi * wi;
    end
    return s;
  endfunction

  task automatic randomize_inputs(input bit extreme);
    for (int i = 0; i < L; i++) begin
      x[i*8 +: 8] = extreme ? 8'h80 : 8'($urandom);
      w[i*4 +: 4] = extreme ? 4'h8  : 4'($urandom);
    end
  endtask

  initial begin
    x = '0; w = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      expect_acc = 0;
      for (int r = 0; r < 3; r++) begin
        randomize_inputs(t == 0);
        expect_acc = (r == 0) ? ref_dot() : expect_acc + ref_dot();
        @(negedge clk); en = 1; clear = (r == 0);
        @(negedge clk); en = 0;
        checks++;
        if (acc !== expect_acc) begin
          failures++; $display("t%0d r%0d acc %0d expected %0d", t, r, acc, expect_acc);
        end
      end
      randomize_inputs(0);
      @(negedge clk); @(negedge clk);
      checks++;
      if (acc !== expect_acc) begin failures++; $display("acc changed without en"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
