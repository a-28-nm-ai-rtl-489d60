// tb_weight_fetcher: checks the bank-to-PE routing and the state-to-weight
// mapping table (state s holds weight s - 8) for random bank data and for
// every state value.
module tb_weight_fetcher;
  import nmcu_pkg::*;
  logic [N_BANKS-1:0][BANK_W-1:0] bank_data;
  logic [N_PE-1:0][PE_W_W-1:0]    pe_w;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  weight_fetcher dut (.bank_data, .pe_w);

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 6; t++) begin
      for (int b = 0; b < N_BANKS; b++)
        for (int c = 0; c < CELLS; c++)
          bank_data[b][c*4 +: 4] = (t == 0) ? 4'(c % 16) : 4'($urandom);
      #1;
      for (int b = 0; b < N_BANKS; b++)
        for (int c = 0; c < CELLS; c++) begin
          int st, wv, expw;
          st   = int'(bank_data[b][c*4 +: 4]);
          expw = st - 8;
          wv   = int'(pe_w[2*b + c/128][(c%128)*4 +: 4]);
          if (wv > 7) wv -= 16;
          checks++;
          if (wv != expw) begin
            failures++;
            if (failures < 10) $display("bank %0d cell %0d state %0d weight %0d expected %0d", b, c, st, wv, expw);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
