// tb_workloads: runs the two networks evaluated on the chip, at full size and
// with generated (not trained) weights and inputs:
//   - the MNIST MLP: 256 inputs (a 16x16 image), 128 hidden units with ReLU,
//     10 outputs; the arg-max is taken by the host (here the testbench);
//   - the FC-AutoEncoder's ninth layer (128 x 128, ReLU), the one layer that
//     ran on the chip, with its 128 inputs supplied by the host.
// Weights follow a distribution peaked at zero, as trained weights do, and are
// written with the program-verify path. Layer l of width N and depth K uses
// ceil(N/16) commands of K/128 reads each; command g, read r uses word line
// base + g*K/128 + r, where bank b holds outputs 16g+2b (cells 0-127) and
// 16g+2b+1 (cells 128-255) for inputs 128r..128r+127.
// Every output byte and the MNIST class are compared with values computed in
// the testbench.
module tb_workloads;
  import nmcu_pkg::*;
  logic clk = 0, rst_n = 0;
  logic bus_valid = 0, bus_we = 0;
  logic [11:0] bus_addr = '0;
  logic [31:0] bus_wdata = '0, bus_rdata;
  logic nmcu_busy, nmcu_irq;
  logic pgm_start = 0, erase = 0;
  logic [2:0] pgm_bank = '0;
  logic [ROW_W-1:0] pgm_addr = '0;
  logic [BANK_W-1:0] pgm_data = '0;
  logic pgm_busy, pgm_done, hv_ready;
  logic [3:0][15:0] vpp_mv, vps_mv;

  ai_mcu dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0, commands = 0;
  int w [128][256];      // weights of the layer being built [output][input]
  int xin [256];         // layer input
  int yout [128];        // expected layer output
  int bias [128], scale [128];

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  task automatic wr(input logic [11:0] a, input logic [31:0] d);
    @(negedge clk); bus_valid = 1; bus_we = 1; bus_addr = a; bus_wdata = d;
    @(negedge clk); bus_valid = 0; bus_we = 0;
  endtask
  task automatic rd(input logic [11:0] a, output logic [31:0] d);
    @(negedge clk); bus_valid = 1; bus_we = 0; bus_addr = a;
    @(negedge clk); bus_valid = 0; d = bus_rdata;
  endtask

  function automatic int sbyte(logic [31:0] v, int j);
    logic [7:0] b;
    int r;
    b = v[j*8 +: 8];
    r = int'(b);
    return (r > 127) ? r - 256 : r;
  endfunction

  // weight peaked at zero, -8..7
  function automatic int gen_w();
    int v;
    v = $urandom_range(0, 7) - $urandom_range(0, 7);
    if ($urandom_range(0, 31) == 0) v = -8;
    return v;
  endfunction

  // Program layer weights w[N][K] from word line base.
  task automatic program_layer(input int n, input int k, input int base);
    logic [BANK_W-1:0] st;
    int nr;
    nr = k / 128;
    for (int g = 0; g < (n + 15) / 16; g++)
      for (int r = 0; r < nr; r++)
        for (int b = 0; b < 8; b++) begin
          for (int c = 0; c < 256; c++) begin
            int o;
            o = 16*g + 2*b + c/128;
            st[c*4 +: 4] = weight_to_state(4'((o < n) ? w[o][128*r + c%128] : 0));
          end
          @(negedge clk); pgm_start = 1; pgm_bank = 3'(b); pgm_addr = ROW_W'(base + g*nr + r); pgm_data = st;
          @(negedge clk); pgm_start = 0;
          while (!pgm_done) @(negedge clk);
        end
  endtask

  // Run one layer: input from the input buffer (segment 0) or the ping-pong
  // buffer; results land in the other ping-pong half, which becomes active.
  task automatic run_layer(input int n, input int k, input int base, input bit from_pp,
                           input bit relu, input int shift);
    int nr;
    mvm_cmd_t c;
    nr = k / 128;
    for (int g = 0; g < (n + 15) / 16; g++) begin
      for (int p = 0; p < 16; p++) begin
        int o;
        o = 16*g + p;
        wr(A_BIAS + 12'(4 * p), (o < n) ? 32'(bias[o]) : 32'd0);
        wr(A_SCALE + 12'(4 * p), (o < n) ? 32'(scale[o]) : 32'd0);
      end
      c = '0; c.wl_base = ROW_W'(base + g*nr); c.nreads_m1 = 3'(nr - 1); c.in_sel = from_pp;
      c.in_seg = 3'd0; c.out_group = 3'(g); c.relu_en = relu;
      c.swap = (g == (n + 15) / 16 - 1); c.shift = 6'(shift);
      wr(A_CMD, 32'(c));
      while (!nmcu_irq) @(negedge clk);
      commands++;
    end
    for (int o = 0; o < n; o++) begin
      longint a;
      real v;
      a = 0;
      for (int i = 0; i < k; i++) a += longint'(xin[i] * w[o][i]);
      v = $floor(real'(a + bias[o]) * real'(scale[o]) / (2.0 ** shift) + 0.5);
      if (v > 127.0) v = 127.0;
      if (v < -128.0) v = -128.0;
      if (relu && v < 0.0) v = 0.0;
      yout[o] = int'(v);
    end
  endtask

  task automatic check_outputs(input int n, input string name);
    logic [31:0] d, st;
    rd(A_STAT, st);          // results are in the active half
    for (int k = 0; k < (n + 3) / 4; k++) begin
      rd(A_PP + 12'(st[2] ? 128 : 0) + 12'(4 * k), d);
      for (int j = 0; j < 4; j++)
        if (4*k + j < n) check(sbyte(d, j) == yout[4*k + j], $sformatf("%s output %0d", name, 4*k + j));
    end
  endtask

  task automatic load_input(input int k);
    for (int i = 0; i < k / 4; i++)
      wr(A_IB + 12'(4 * i), {8'(xin[4*i+3]), 8'(xin[4*i+2]), 8'(xin[4*i+1]), 8'(xin[4*i])});
  endtask

  task automatic make_coefs(input int n, input int bmax, input int smin, input int smax);
    for (int o = 0; o < n; o++) begin
      bias[o]  = $urandom_range(0, 2 * bmax) - bmax;
      scale[o] = $urandom_range(smin, smax);
    end
  endtask

  int hidden [128];

  initial begin
    int best, cls;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ================= MNIST MLP 256-128-10 =================
    for (int o = 0; o < 128; o++) for (int i = 0; i < 256; i++) w[o][i] = gen_w();
    program_layer(128, 256, 0);                  // word lines 0..15
    for (int i = 0; i < 256; i++) xin[i] = $urandom_range(0, 127);   // pixels
    load_input(256);
    make_coefs(128, 2000, 300, 900);
    run_layer(128, 256, 0, 0, 1, 16);
    check_outputs(128, "mnist hidden");
    for (int o = 0; o < 128; o++) hidden[o] = yout[o];
    for (int o = 0; o < 10; o++) for (int i = 0; i < 128; i++) w[o][i] = gen_w();
    program_layer(10, 128, 16);                  // word line 16
    for (int i = 0; i < 128; i++) xin[i] = hidden[i];
    make_coefs(10, 2000, 300, 900);
    run_layer(10, 128, 16, 1, 0, 15);
    check_outputs(10, "mnist logits");
    best = -1000; cls = 0;
    for (int o = 0; o < 10; o++) if (yout[o] > best) begin best = yout[o]; cls = o; end
    $display("MNIST class %0d (logit %0d)", cls, best);

    // ========== FC-AutoEncoder layer 9, 128 x 128 ==========
    for (int o = 0; o < 128; o++) for (int i = 0; i < 128; i++) w[o][i] = gen_w();
    program_layer(128, 128, 32);                 // word lines 32..39
    for (int i = 0; i < 128; i++) xin[i] = $urandom_range(0, 127);
    load_input(128);
    make_coefs(128, 2000, 300, 900);
    run_layer(128, 128, 32, 0, 1, 14);
    check_outputs(128, "autoencoder layer 9");

    $display("commands run: %0d", commands);
    check(commands == 8 + 1 + 8, "command count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
