// tb_flow_controller: drives MVM commands of 1 to 8 reads against a bank stub
// with a read latency of LAT cycles and checks the word-line addresses, the
// input segments, the PE clear/accumulate pattern, the write-back slot, the
// swap flag, and the command length nreads x (LAT + 1) + 2 cycles.
module tb_flow_controller;
  import nmcu_pkg::*;
  localparam int LAT = 2;
  logic clk = 0, rst_n = 0, start = 0;
  mvm_cmd_t cmd;
  logic fl_rd_en, fl_rd_valid, if_load, if_sel, pe_en, pe_clear, q_en, relu_en, wb_en, swap, busy, done;
  logic [ROW_W-1:0] fl_addr;
  logic [2:0] ib_seg, wb_group;
  logic [5:0] shift;
  logic [LAT:0] pipe;
  int checks = 0, failures = 0;

  flow_controller dut (.clk, .rst_n, .start, .cmd, .fl_rd_en, .fl_addr, .fl_rd_valid,
    .if_load, .if_sel, .ib_seg, .pe_en, .pe_clear, .q_en, .shift, .relu_en,
    .wb_en, .wb_group, .swap, .busy, .done);
  always #5 clk = ~clk;

  // bank stub
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) pipe <= '0; else pipe <= {pipe[LAT-1:0], fl_rd_en};
  assign fl_rd_valid = pipe[LAT-1];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    cmd = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 24; t++) begin
      int nr, cycles, reads, macs, clears;
      mvm_cmd_t c;
      c = '0;
      c.wl_base   = ROW_W'($urandom_range(0, 500));
      c.nreads_m1 = 3'(t % 8);
      c.in_sel    = 1'($urandom);
      c.in_seg    = 3'($urandom);
      c.out_group = 3'($urandom);
      c.relu_en   = 1'($urandom);
      c.swap      = 1'($urandom);
      c.shift     = 6'($urandom);
      nr = int'(c.nreads_m1) + 1;
      @(negedge clk); start = 1; cmd = c;
      @(negedge clk); start = 0; cmd = '0;
      cycles = 1; reads = 0; macs = 0; clears = 0;
      while (!done) begin
        if (fl_rd_en) begin
          check(fl_addr == c.wl_base + ROW_W'(reads), "wl address steps by one");
          check(ib_seg == 3'(c.in_seg + 3'(reads)), "input segment steps by one");
          check(if_load && if_sel == c.in_sel, "fetch with the command's source");
          reads++;
        end
        if (pe_en) begin macs++; if (pe_clear) clears++; end
        @(negedge clk); cycles++;
      end
      check(wb_group == c.out_group && relu_en == c.relu_en && shift == c.shift, "write-back fields");
      check(swap == c.swap, "swap flag");
      check(reads == nr && macs == nr && clears == 1, "reads, accumulations, one clear");
      check(cycles == nr * (LAT + 1) + 2, $sformatf("latency %0d expected %0d", cycles, nr * (LAT + 1) + 2));
      @(negedge clk);
      check(!busy, "idle after done");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
