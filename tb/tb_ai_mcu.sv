// tb_ai_mcu: end-to-end test of the compute subsystem at its full size
// (8 banks x 512 word lines x 256 cells, 16 PEs), with no parameter changed.
//
// 1. Programs the weights of a small two-layer network into the flash through
//    the program-verify path (the pump ramps for every row). One row is first
//    programmed with other data and erased, so the result depends on erase.
// 2. Layer 1: 32 outputs x 256 inputs from the input buffer, two commands of
//    two reads each (rows 0-1 and 2-3), ReLU; the second command swaps the
//    ping-pong halves.
// 3. Layer 2: 16 outputs x 128 inputs taken from the ping-pong buffer (row 4),
//    no ReLU, swap again; results are read over the bus.
// All results are compared with integer arithmetic in the testbench. Each
// mechanism (multi-read accumulation, both input sources, swap, ReLU clamp,
// saturation, program pulses, pump regulation, erase) is counted and must
// occur at least once. Command length must be nreads x 3 + 2 cycles.
module tb_ai_mcu;
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

  int checks = 0, failures = 0;
  int n_multi = 0, n_src_ib = 0, n_src_pp = 0, n_swap = 0, n_relu = 0, n_sat = 0;
  int n_pulse_cyc = 0, n_regulate = 0, n_erase = 0, n_vpgm = 0;
  int w [5][16][128];         // weights by row, PE, element
  int x [256];
  int bias [16], scale [16];
  int shift;
  int h1 [32], y2 [16];

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // pump activity, observed at the pins
  always @(posedge clk) begin
    if (pgm_busy && hv_ready) n_pulse_cyc++;
    if (pgm_busy && hv_ready && vpp_mv[3] >= 16'd10000) n_regulate++;
    if (vps_mv[3] >= 16'd9500) n_vpgm++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
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

  task automatic program_row(input int bank, input int row, input logic [BANK_W-1:0] states);
    @(negedge clk); pgm_start = 1; pgm_bank = 3'(bank); pgm_addr = ROW_W'(row); pgm_data = states;
    @(negedge clk); pgm_start = 0;
    while (!pgm_done) @(negedge clk);
    @(negedge clk);
  endtask

  function automatic int requant(longint a, int p, bit relu);
    real v;
    v = $floor(real'(a + bias[p]) * real'(scale[p]) / (2.0 ** shift) + 0.5);
    if (v > 127.0) begin v = 127.0; n_sat++; end
    if (v < -128.0) begin v = -128.0; n_sat++; end
    if (relu && v < 0.0) begin v = 0.0; n_relu++; end
    return int'(v);
  endfunction

  task automatic load_coefs(input int sh);
    shift = sh;
    for (int p = 0; p < 16; p++) begin
      bias[p]  = $urandom_range(0, 4000) - 2000;
      scale[p] = $urandom_range(200, 1200);
      wr(A_BIAS + 12'(4 * p), 32'(bias[p]));
      wr(A_SCALE + 12'(4 * p), 32'(scale[p]));
    end
  endtask

  task automatic run(input mvm_cmd_t c);
    int cyc, nr;
    logic [31:0] st0, st1;
    nr = int'(c.nreads_m1) + 1;
    rd(A_STAT, st0);
    @(negedge clk); bus_valid = 1; bus_we = 1; bus_addr = A_CMD; bus_wdata = 32'(c);
    @(negedge clk); bus_valid = 0; bus_we = 0; cyc = 1;
    check(nmcu_busy, "busy after the command");
    while (!nmcu_irq) begin @(negedge clk); cyc++; end
    check(cyc == nr * 3 + 2, $sformatf("command took %0d cycles", cyc));
    rd(A_STAT, st1);
    check(st1[1:0] == 2'b10, "status done, not busy");
    if (nr > 1) n_multi++;
    if (c.in_sel) n_src_pp++; else n_src_ib++;
    if (st1[2] != st0[2]) n_swap++;
    check(st1[2] == (st0[2] ^ c.swap), "pp_sel follows swap");
  endtask

  initial begin
    logic [31:0] d;
    logic [BANK_W-1:0] states;
    mvm_cmd_t c;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---- weights: row r, bank b holds PE 2b (cells 0..127) and 2b+1
    for (int r = 0; r < 5; r++)
      for (int p = 0; p < 16; p++)
        for (int i = 0; i < 128; i++) w[r][p][i] = $urandom_range(0, 15) - 8;
    // row 4 of bank 0: program with other data first, then erase it
    for (int cc = 0; cc < 256; cc++) states[cc*4 +: 4] = 4'($urandom_range(1, 15));
    program_row(0, 4, states);
    @(negedge clk); erase = 1; pgm_bank = 3'd0; pgm_addr = ROW_W'(4);
    @(negedge clk); erase = 0;
    n_erase++;
    for (int r = 0; r < 5; r++)
      for (int b = 0; b < 8; b++) begin
        for (int cc = 0; cc < 256; cc++)
          states[cc*4 +: 4] = weight_to_state(4'(w[r][2*b + cc/128][cc%128]));
        program_row(b, r, states);
      end

    // ---- layer 1: 32 x 256, input in segments 0 and 1
    for (int i = 0; i < 256; i++) x[i] = $urandom_range(0, 255) - 128;
    for (int k = 0; k < 64; k++)
      wr(A_IB + 12'(4 * k), {8'(x[4*k+3]), 8'(x[4*k+2]), 8'(x[4*k+1]), 8'(x[4*k])});
    for (int g = 0; g < 2; g++) begin
      load_coefs(16);
      c = '0; c.wl_base = ROW_W'(2 * g); c.nreads_m1 = 3'd1; c.in_sel = 0; c.in_seg = 3'd0;
      c.out_group = 3'(g); c.relu_en = 1; c.swap = (g == 1); c.shift = 6'(shift);
      run(c);
      for (int p = 0; p < 16; p++) begin
        longint a;
        a = 0;
        for (int r = 0; r < 2; r++)
          for (int i = 0; i < 128; i++) a += longint'(x[r*128 + i] * w[2*g + r][p][i]);
        h1[16*g + p] = requant(a, p, 1);
      end
    end
    // hidden layer now in ping-pong half 1 (pp_sel = 1)
    for (int k = 0; k < 8; k++) begin
      rd(A_PP + 12'(128 + 4 * k), d);
      for (int j = 0; j < 4; j++) check(sbyte(d, j) == h1[4*k + j], $sformatf("hidden %0d", 4*k + j));
    end

    // ---- layer 2: 16 x 128 from the ping-pong buffer, linear
    load_coefs(14);
    c = '0; c.wl_base = ROW_W'(4); c.nreads_m1 = 3'd0; c.in_sel = 1;
    c.out_group = 3'd0; c.relu_en = 0; c.swap = 1; c.shift = 6'(shift);
    run(c);
    for (int p = 0; p < 16; p++) begin
      longint a;
      a = 0;
      for (int i = 0; i < 32; i++) a += longint'(h1[i] * w[4][p][i]);
      y2[p] = requant(a, p, 0);
    end
    for (int k = 0; k < 4; k++) begin
      rd(A_PP + 12'(4 * k), d);
      for (int j = 0; j < 4; j++) check(sbyte(d, j) == y2[4*k + j], $sformatf("output %0d", 4*k + j));
    end

    $display("mechanisms: multi-read %0d, input-buffer source %0d, ping-pong source %0d, swap %0d, relu %0d, saturation %0d, pulse cycles %0d, regulated cycles %0d, VPGM on VPS4 %0d, erase %0d",
             n_multi, n_src_ib, n_src_pp, n_swap, n_relu, n_sat, n_pulse_cyc, n_regulate, n_vpgm, n_erase);
    check(n_multi > 0, "multi-read accumulation");
    check(n_src_ib > 0, "input-buffer source");
    check(n_src_pp > 0, "ping-pong source");
    check(n_swap > 0, "ping-pong swap");
    check(n_relu > 0, "ReLU clamp");
    check(n_sat > 0, "saturation");
    check(n_pulse_cyc > 0, "program pulses with the pump ready");
    check(n_regulate > 0, "pump at regulation");
    check(n_vpgm > 0, "VPGM switched onto VPS4");
    check(n_erase > 0, "erase");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
