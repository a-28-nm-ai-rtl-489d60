// tb_pingpong_buffer: fills all eight 16-byte slots of both halves through the
// write-back port, then checks the 1024-bit vector of each half, the bus read
// of every word, and that writing one half leaves the other unchanged.
module tb_pingpong_buffer;
  logic clk = 0, rst_n = 0, wb_en = 0, wb_half = 0, rd_half = 0, bus_re = 0;
  logic [2:0] wb_group = '0;
  logic [127:0] wb_data = '0;
  logic [1023:0] vec;
  logic [5:0] bus_addr = '0;
  logic [31:0] bus_rdata;
  logic [127:0] model [2][8];
  int checks = 0, failures = 0;

  pingpong_buffer dut (.clk, .rst_n, .wb_en, .wb_half, .wb_group, .wb_data, .rd_half, .vec,
                       .bus_re, .bus_addr, .bus_rdata);
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
    for (int h = 0; h < 2; h++)
      for (int g = 0; g < 8; g++) begin
        model[h][g] = {$urandom, $urandom, $urandom, $urandom};
        @(negedge clk); wb_en = 1; wb_half = 1'(h); wb_group = 3'(g); wb_data = model[h][g];
      end
    @(negedge clk); wb_en = 0;
    for (int h = 0; h < 2; h++) begin
      rd_half = 1'(h); #1;
      for (int g = 0; g < 8; g++) begin
        checks++;
        if (vec[g*128 +: 128] !== model[h][g]) begin failures++; $display("half %0d group %0d", h, g); end
      end
      for (int wd = 0; wd < 32; wd++) begin
        @(negedge clk); bus_re = 1; bus_addr = {1'(h), 5'(wd)};
        @(negedge clk); bus_re = 0;
        checks++;
        if (bus_rdata !== model[h][wd/4][(wd%4)*32 +: 32]) begin failures++; $display("bus half %0d word %0d", h, wd); end
      end
    end
    // overwrite one slot of half 1, half 0 must not change
    @(negedge clk); wb_en = 1; wb_half = 1; wb_group = 3; wb_data = ~model[1][3];
    @(negedge clk); wb_en = 0; model[1][3] = ~model[1][3];
    rd_half = 0; #1;
    checks++;
    if (vec !== {model[0][7], model[0][6], model[0][5], model[0][4], model[0][3], model[0][2], model[0][1], model[0][0]})
      begin failures++; $display("half 0 disturbed"); end
    rd_half = 1; #1;
    checks++;
    if (vec[3*128 +: 128] !== model[1][3]) begin failures++; $display("half 1 slot 3 not rewritten"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
