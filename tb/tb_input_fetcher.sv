// tb_input_fetcher: checks that a load takes the input-buffer vector or the
// ping-pong vector according to in_sel, one cycle later, and holds otherwise.
module tb_input_fetcher;
  logic clk = 0, rst_n = 0, load = 0, in_sel = 0;
  logic [1023:0] ib_vec, pp_vec, vec, expv;
  int checks = 0, failures = 0;

  input_fetcher dut (.clk, .rst_n, .load, .in_sel, .ib_vec, .pp_vec, .vec);
  always #5 clk = ~clk;

  function automatic logic [1023:0] rnd();
    logic [1023:0] v;
    for (int i = 0; i < 32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ib_vec = rnd(); pp_vec = rnd(); expv = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      @(negedge clk);
      ib_vec = rnd(); pp_vec = rnd();
      load = 1'($urandom); in_sel = 1'($urandom);
      if (load) expv = in_sel ? pp_vec : ib_vec;
      @(negedge clk); load = 0;
      checks++;
      if (vec !== expv) begin failures++; $display("t%0d mismatch load=%0d sel=%0d", t, load, in_sel); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
