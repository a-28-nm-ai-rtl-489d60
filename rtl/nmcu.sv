// nmcu: the near-memory computing unit.
//
// It sits between the system bus and the eight EFLASH banks. The host loads an
// input vector (input buffer), sixteen biases and scales, then writes one
// command word; the flow controller reads the weight rows, the sixteen PEs
// accumulate 128-element dot products per read, the quantization logic turns
// the sums into int8, the activation stage applies ReLU, and the 16 results are
// written back to the ping-pong buffer, from where the next layer can take them
// as its input without any bus traffic.
//
// Bus (slave, 32-bit words, byte addresses, read data one cycle after a read):
//   0x000-0x3FF input buffer (R/W)    0x400-0x4FF ping-pong buffer (R)
//   0x500-0x53F bias[0..15] (R/W)     0x540-0x57F scale[0..15] (R/W)
//   0x580 command (W, bits [26:0] = mvm_cmd_t, starts the MVM)
//   0x584 status (R: bit0 busy, bit1 done since last start, bit2 pp_sel)
//   0x588 pp_sel (R/W: ping-pong half read as input; results go to the other)
// EFLASH side: one read request with one word-line address to all banks, and
// 8 x 1024-bit cell states back with a valid strobe.
// The block structure and widths are the chip's; the address map, command
// layout and the pp_sel register are this design's choices.
module nmcu
  import nmcu_pkg::*;
(
  input  logic                       clk,
  input  logic                       rst_n,
  // system bus
  input  logic                       bus_valid,
  input  logic                       bus_we,
  input  logic [11:0]                bus_addr,
  input  logic [31:0]                bus_wdata,
  output logic [31:0]                bus_rdata,
  // EFLASH read port
  output logic                       fl_rd_en,
  output logic [ROW_W-1:0]           fl_addr,
  input  logic                       fl_rd_valid,
  input  logic [N_BANKS-1:0][BANK_W-1:0] fl_data,
  output logic                       busy,
  output logic                       irq_done
);

  // ---------------------------------------------------------------- bus decode
  logic sel_ib, sel_pp, sel_bias, sel_scale, sel_cmd, sel_stat, sel_ppsel;
  always_comb begin
    sel_ib    = bus_valid && (bus_addr < A_PP);
    sel_pp    = bus_valid && (bus_addr >= A_PP)    && (bus_addr < A_BIAS);
    sel_bias  = bus_valid && (bus_addr >= A_BIAS)  && (bus_addr < A_SCALE);
    sel_scale = bus_valid && (bus_addr >= A_SCALE) && (bus_addr < A_CMD);
    sel_cmd   = bus_valid && (bus_addr == A_CMD);
    sel_stat  = bus_valid && (bus_addr == A_STAT);
    sel_ppsel = bus_valid && (bus_addr == A_PPSEL);
  end

  typedef enum logic [2:0] {R_NONE, R_IB, R_PP, R_BIAS, R_SCALE, R_REG} rsrc_t;
  rsrc_t       rsrc;
  logic [31:0] reg_rdata;

  // --------------------------------------------------------------- components
  logic [VEC_W-1:0] ib_vec, pp_vec, in_vec;
  logic [31:0]      ib_rdata, pp_rdata, bias_rdata, scale_rdata;
  logic [N_PE-1:0][31:0] bias_q, scale_q;
  logic [N_PE-1:0][PE_W_W-1:0] pe_w;
  logic [N_PE-1:0][ACC_W-1:0]  acc;
  logic [N_PE-1:0][IN_W-1:0]   q;
  logic [WB_W-1:0]             wb_word;

  logic if_load, if_sel, pe_en, pe_clear, q_en, relu_en, wb_en, swap, fc_done;
  logic [$clog2(IB_SEGS)-1:0]   ib_seg;
  logic [$clog2(PP_GROUPS)-1:0] wb_group;
  logic [5:0] shift;
  logic pp_sel, done_flag;

  input_buffer u_ib (
    .clk, .rst_n,
    .we(sel_ib && bus_we), .re(sel_ib && !bus_we), .addr(bus_addr[9:2]),
    .wdata(bus_wdata), .rdata(ib_rdata), .seg(ib_seg), .vec(ib_vec)
  );

  pingpong_buffer u_pp (
    .clk, .rst_n,
    .wb_en, .wb_half(~pp_sel), .wb_group, .wb_data(wb_word),
    .rd_half(pp_sel), .vec(pp_vec),
    .bus_re(sel_pp && !bus_we), .bus_addr(bus_addr[7:2]), .bus_rdata(pp_rdata)
  );

  coef_buffer u_bias (
    .clk, .rst_n, .we(sel_bias && bus_we), .re(sel_bias && !bus_we),
    .addr(bus_addr[5:2]), .wdata(bus_wdata), .rdata(bias_rdata), .q(bias_q)
  );

  coef_buffer u_scale (
    .clk, .rst_n, .we(sel_scale && bus_we), .re(sel_scale && !bus_we),
    .addr(bus_addr[5:2]), .wdata(bus_wdata), .rdata(scale_rdata), .q(scale_q)
  );

  flow_controller u_fc (
    .clk, .rst_n,
    .start(sel_cmd && bus_we), .cmd(mvm_cmd_t'(bus_wdata[$bits(mvm_cmd_t)-1:0])),
    .fl_rd_en, .fl_addr, .fl_rd_valid,
    .if_load, .if_sel, .ib_seg,
    .pe_en, .pe_clear, .q_en, .shift, .relu_en,
    .wb_en, .wb_group, .swap, .busy, .done(fc_done)
  );

  input_fetcher u_if (
    .clk, .rst_n, .load(if_load), .in_sel(if_sel),
    .ib_vec, .pp_vec, .vec(in_vec)
  );

  weight_fetcher u_wf (.bank_data(fl_data), .pe_w);

  for (genvar i = 0; i < N_PE; i++) begin : g_pe
    pe u_pe (
      .clk, .rst_n, .en(pe_en), .clear(pe_clear),
      .x(in_vec), .w(pe_w[i]), .acc(acc[i])
    );
  end

  quant_logic u_q (
    .clk, .rst_n, .en(q_en), .acc, .bias(bias_q), .scale(scale_q), .shift, .q
  );

  activation_relu u_act (.relu_en, .q, .wb(wb_word));

  // ------------------------------------------------- registers and read data
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pp_sel    <= 1'b0;
      done_flag <= 1'b0;
      rsrc      <= R_NONE;
      reg_rdata <= '0;
    end else begin
      if (sel_ppsel && bus_we) pp_sel <= bus_wdata[0];
      else if (swap)           pp_sel <= ~pp_sel;
      if (sel_cmd && bus_we && !busy) done_flag <= 1'b0;
      else if (fc_done)               done_flag <= 1'b1;
      rsrc <= R_NONE;
      if (bus_valid && !bus_we) begin
        if (sel_ib)         rsrc <= R_IB;
        else if (sel_pp)    rsrc <= R_PP;
        else if (sel_bias)  rsrc <= R_BIAS;
        else if (sel_scale) rsrc <= R_SCALE;
        else                rsrc <= R_REG;
        reg_rdata <= sel_stat  ? {29'd0, pp_sel, done_flag, busy} :
                     sel_ppsel ? {31'd0, pp_sel} : 32'd0;
      end
    end
  end

  always_comb begin
    case (rsrc)
      R_IB:    bus_rdata = ib_rdata;
      R_PP:    bus_rdata = pp_rdata;
      R_BIAS:  bus_rdata = bias_rdata;
      R_SCALE: bus_rdata = scale_rdata;
      R_REG:   bus_rdata = reg_rdata;
      default: bus_rdata = '0;
    endcase
  end

  assign irq_done = fc_done;

  // The buffers must not change under a running command.
  a_no_write_while_busy: assert property (@(posedge clk) disable iff (!rst_n)
    busy && bus_valid && bus_we |-> !(sel_ib || sel_bias || sel_scale || sel_ppsel));

endmodule
