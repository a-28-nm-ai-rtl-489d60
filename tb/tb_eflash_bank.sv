// tb_eflash_bank: the bank model with its program-verify controller and
// word-line driver, at 8 rows to keep the run short. An ideal pump supplies
// 10 V on request. Programs rows with random 4-bit targets (and one row with
// every state 0..15), reads all rows back with the READ_LAT read latency,
// checks an unprogrammed row still reads erased, erases a row and checks it
// reads state 0.
module tb_eflash_bank;
  localparam int NR = 8, LAT = 2;
  logic clk = 0, rst_n = 0, rd_en = 0, pgm_start = 0, erase = 0;
  logic [2:0] rd_addr = '0, pgm_addr = '0;
  logic [1023:0] rd_data, pgm_data = '0;
  logic rd_valid, pgm_busy, pgm_done, hv_ready, hv_req;
  logic [15:0] pgm_pulses, vps4_mv, wl_mv;
  logic [1023:0] model [NR];
  int checks = 0, failures = 0, pulses = 0;

  eflash_bank #(.NROWS(NR), .READ_LAT(LAT)) dut (
    .clk, .rst_n, .rd_en, .rd_addr, .rd_data, .rd_valid,
    .pgm_start, .erase, .pgm_addr, .pgm_data, .pgm_busy, .pgm_done, .pgm_pulses,
    .vps4_mv, .hv_ready, .hv_req, .wl_mv);
  always #5 clk = ~clk;

  assign hv_ready = hv_req;
  assign vps4_mv  = hv_req ? 16'd10000 : 16'd2500;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic read_row(input int r, output logic [1023:0] d);
    int lat;
    @(negedge clk); rd_en = 1; rd_addr = 3'(r);
    @(negedge clk); rd_en = 0; lat = 1;
    while (!rd_valid) begin @(negedge clk); lat++; end
    checks++;
    if (lat != LAT) begin failures++; $display("read latency %0d", lat); end
    d = rd_data;
  endtask

  initial begin
    logic [1023:0] d;
    for (int r = 0; r < NR; r++) model[r] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < NR - 1; r++) begin
      for (int c = 0; c < 256; c++) model[r][c*4 +: 4] = (r == 0) ? 4'(c % 16) : 4'($urandom);
      @(negedge clk); pgm_start = 1; pgm_addr = 3'(r); pgm_data = model[r];
      @(negedge clk); pgm_start = 0;
      while (!pgm_done) @(negedge clk);
      pulses += int'(pgm_pulses);
    end
    checks++;
    if (pulses == 0) begin failures++; $display("no program pulses"); end
    for (int r = 0; r < NR; r++) begin
      read_row(r, d);
      for (int c = 0; c < 256; c++) begin
        checks++;
        if (d[c*4 +: 4] !== model[r][c*4 +: 4]) begin
          failures++;
          if (failures < 10) $display("row %0d cell %0d state %0d expected %0d", r, c, d[c*4 +: 4], model[r][c*4 +: 4]);
        end
      end
    end
    @(negedge clk); erase = 1; pgm_addr = 3'd1;
    @(negedge clk); erase = 0;
    read_row(1, d);
    checks++;
    if (d !== '0) begin failures++; $display("erased row not at state 0"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
