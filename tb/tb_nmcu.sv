// tb_nmcu: the NMCU through its bus port, with an EFLASH stub holding random
// cell states and answering reads two cycles later. Runs a two-read layer
// (256 inputs from the input buffer, ReLU, swap) and then a one-read layer
// that takes its input from the ping-pong buffer, and compares every result
// with int8 values worked out in the testbench. Also checks the status
// register, the command length and the bias/scale read-back.
module tb_nmcu;
  import nmcu_pkg::*;
  localparam int LAT = 2;
  logic clk = 0, rst_n = 0;
  logic bus_valid = 0, bus_we = 0;
  logic [11:0] bus_addr = '0;
  logic [31:0] bus_wdata = '0, bus_rdata;
  logic fl_rd_en, fl_rd_valid, busy, irq_done;
  logic [ROW_W-1:0] fl_addr;
  logic [7:0][1023:0] fl_data;
  logic [LAT-1:0] vpipe;
  logic [7:0][1023:0] rows [8];   // weight rows 0..7 (states)
  int x [256];
  int bias [16], scale [16];
  int shift;
  int checks = 0, failures = 0, relu_hits = 0;

  nmcu dut (.clk, .rst_n, .bus_valid, .bus_we, .bus_addr, .bus_wdata, .bus_rdata,
            .fl_rd_en, .fl_addr, .fl_rd_valid, .fl_data, .busy, .irq_done);
  always #5 clk = ~clk;

  always_ff @(posedge clk) begin
    vpipe <= LAT'({vpipe, fl_rd_en});
    if (fl_rd_en) fl_data <= rows[fl_addr[2:0]];
  end
  assign fl_rd_valid = vpipe[LAT-1];

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(input logic [11:0] a, input logic [31:0] d);
    @(negedge clk); bus_valid = 1; bus_we = 1; bus_addr = a; bus_wdata = d;
    @(negedge clk); bus_valid = 0; bus_we = 0;
  endtask
  task automatic rd(input logic [11:0] a, output logic [31:0] d);
    @(negedge clk); bus_valid = 1; bus_we = 0; bus_addr = a;
    @(negedge clk); bus_valid = 0; d = bus_rdata;
  endtask

  function automatic int wt(int row, int pe_i, int i);
    int b, c;
    b = pe_i / 2; c = (pe_i % 2) * 128 + i;
    return int'(rows[row][b][c*4 +: 4]) - 8;
  endfunction

  function automatic int requant(longint a, int p, bit relu);
    real v;
    v = $floor(real'(a + bias[p]) * real'(scale[p]) / (2.0 ** shift) + 0.5);
    if (v > 127.0) v = 127.0;
    if (v < -128.0) v = -128.0;
    if (relu && v < 0.0) begin relu_hits++; v = 0.0; end
    return int'(v);
  endfunction

  function automatic int sbyte(logic [31:0] w, int j);
    logic [7:0] b;
    int v;
    b = w[j*8 +: 8];
    v = int'(b);
    return (v > 127) ? v - 256 : v;
  endfunction

  task automatic load_coefs();
    for (int p = 0; p < 16; p++) begin
      bias[p]  = $urandom_range(0, 4000) - 2000;
      scale[p] = $urandom_range(200, 1200);
      wr(A_BIAS + 12'(4 * p), 32'(bias[p]));
      wr(A_SCALE + 12'(4 * p), 32'(scale[p]));
    end
  endtask

  task automatic run(input mvm_cmd_t c, input int nreads);
    int cyc;
    @(negedge clk); bus_valid = 1; bus_we = 1; bus_addr = A_CMD; bus_wdata = 32'(c);
    @(negedge clk); bus_valid = 0; bus_we = 0; cyc = 1;
    while (!irq_done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != nreads * (LAT + 1) + 2) begin failures++; $display("command took %0d cycles", cyc); end
  endtask

  int y1 [16], y2 [16];

  initial begin
    logic [31:0] d;
    mvm_cmd_t c;
    for (int r = 0; r < 8; r++)
      for (int b = 0; b < 8; b++)
        for (int k = 0; k < 32; k++) rows[r][b][k*32 +: 32] = $urandom;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // layer 1: 256 inputs in segments 2 and 3, weights in rows 5 and 6
    for (int i = 0; i < 256; i++) x[i] = $urandom_range(0, 255) - 128;
    for (int k = 0; k < 64; k++)
      wr(A_IB + 12'(256 + 4 * k), {8'(x[4*k+3]), 8'(x[4*k+2]), 8'(x[4*k+1]), 8'(x[4*k])});
    shift = 16;
    load_coefs();
    rd(A_BIAS + 12'd12, d);
    checks++; if (int'(d) != bias[3]) begin failures++; $display("bias read-back"); end
    rd(A_SCALE + 12'd20, d);
    checks++; if (int'(d) != scale[5]) begin failures++; $display("scale read-back"); end
    c = '0; c.wl_base = 9'd5; c.nreads_m1 = 3'd1; c.in_sel = 0; c.in_seg = 3'd2;
    c.out_group = 3'd3; c.relu_en = 1; c.swap = 1; c.shift = 6'(shift);
    run(c, 2);
    for (int p = 0; p < 16; p++) begin
      longint a;
      a = 0;
      for (int r = 0; r < 2; r++)
        for (int i = 0; i < 128; i++) a += longint'(x[r*128 + i] * wt(5 + r, p, i));
      y1[p] = requant(a, p, 1);
    end
    rd(A_STAT, d);
    checks++; if (d[2:0] != 3'b110) begin failures++; $display("status %b", d[2:0]); end
    for (int k = 0; k < 4; k++) begin  // results in half 1, slot 3
      rd(A_PP + 12'(128 + 48 + 4 * k), d);
      for (int j = 0; j < 4; j++) begin
        checks++;
        if (sbyte(d, j) != y1[4*k + j]) begin
          failures++; $display("layer1 out %0d = %0d expected %0d", 4*k+j, sbyte(d, j), y1[4*k+j]);
        end
      end
    end
    // layer 2: input is ping-pong half 1 (slot 3 filled, the rest zero)
    load_coefs();
    shift = 12;
    c = '0; c.wl_base = 9'd1; c.nreads_m1 = 3'd0; c.in_sel = 1; c.out_group = 3'd0;
    c.relu_en = 0; c.swap = 0; c.shift = 6'(shift);
    run(c, 1);
    for (int p = 0; p < 16; p++) begin
      longint a;
      a = 0;
      for (int i = 0; i < 16; i++) a += longint'(y1[i] * wt(1, p, 48 + i));
      y2[p] = requant(a, p, 0);
    end
    for (int k = 0; k < 4; k++) begin  // results in half 0, slot 0
      rd(A_PP + 12'(4 * k), d);
      for (int j = 0; j < 4; j++) begin
        checks++;
        if (sbyte(d, j) != y2[4*k + j]) begin
          failures++; $display("layer2 out %0d = %0d expected %0d", 4*k+j, sbyte(d, j), y2[4*k+j]);
        end
      end
    end
    checks++;
    if (relu_hits == 0) begin failures++; $display("ReLU never clamped"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
