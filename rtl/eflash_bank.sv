// eflash_bank: behavioural model of one unit bank of the 4-bit/cell embedded
// flash (512 word lines x 256 cells, 512 Kb). The cell array and the sense
// amplifiers are analog and process specific; this model stands in for them.
// The program-verify controller (pv_controller) and the word-line driver model
// (wl_driver) are instantiated inside, as in the chip's unit bank.
//
// Each cell keeps a threshold voltage in 10 mV units. Erased cells sit at
// 0-40 mV (state 0). Verify level k (k = 1..15) is VFY_STEP_MV x k; a read
// compares each cell with read levels RD_MARGIN_MV below every verify level and
// returns the state index 0..15 (4 bits per cell, cell c in bits 4c+3..4c).
//
// Read: rd_en with rd_addr; READ_LAT cycles later rd_valid is high for one
// cycle and rd_data holds the 256 states (it stays until the next read).
// Program: pgm_start with pgm_addr and pgm_data (target states); the verify
// reads drive the word line to VRD through the driver with SRD high, each pulse
// drives it to VPS4 through SWR1/SWR2 for PULSE_CYC cycles. A pulse waits for
// hv_ready and raises the threshold of the masked cells by 30-60 mV only if
// the word line reached VPGM_MIN_MV. pgm_done pulses at the end.
// Erase: erase with pgm_addr returns the row to state 0 in one cycle.
// The array is kept as one 2048-bit word per row, read and written whole.
// 512 x 256 cells, 256 weights per read and the 0-2.5 V verify range are the
// chip's; the level values, latencies and pulse response are assumptions.
module eflash_bank
  import nmcu_pkg::*;
#(
  parameter int unsigned NROWS        = ROWS,
  parameter int unsigned READ_LAT     = 2,
  parameter int unsigned VFY_LAT      = 2,
  parameter int unsigned PULSE_CYC    = 4,
  parameter int unsigned VFY_STEP_MV  = 160,
  parameter int unsigned RD_MARGIN_MV = 40,
  parameter int unsigned VPGM_MIN_MV  = 9000,
  parameter logic [31:0] SEED         = 32'h1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // read port
  input  logic                     rd_en,
  input  logic [$clog2(NROWS)-1:0] rd_addr,
  output logic [BANK_W-1:0]        rd_data,
  output logic                     rd_valid,
  // program / erase port
  input  logic                     pgm_start,
  input  logic                     erase,
  input  logic [$clog2(NROWS)-1:0] pgm_addr,
  input  logic [BANK_W-1:0]        pgm_data,
  output logic                     pgm_busy,
  output logic                     pgm_done,
  output logic [15:0]              pgm_pulses,
  // high voltage
  input  logic [15:0]              vps4_mv,
  input  logic                     hv_ready,
  output logic                     hv_req,
  output logic [15:0]              wl_mv
);

  localparam int unsigned AW = $clog2(NROWS);

  typedef logic [CELLS-1:0][7:0] row_t;
  row_t vth [NROWS];                 // threshold voltages, 10 mV units, one word per row

  // Erased row: thresholds 0-40 mV.
  function automatic row_t erased_row();
    row_t v;
    for (int c = 0; c < CELLS; c++) v[c] = 8'(c % 5);
    return v;
  endfunction
  localparam row_t ERASED = erased_row();

  // Factory state: every cell erased.
  initial begin
    for (int r = 0; r < NROWS; r++) vth[r] = ERASED;
  end

  // ------------------------------------------------------------- sensing
  function automatic logic [3:0] sense(input logic [7:0] v);
    logic [3:0] s;
    s = 4'd0;
    for (int k = 1; k < 16; k++)
      if (32'(v) * 10 >= k * VFY_STEP_MV - RD_MARGIN_MV) s = 4'(k);
    return s;
  endfunction

  logic [READ_LAT-1:0] rd_pipe;
  row_t                rd_vth;
  logic [BANK_W-1:0]   sensed;

  // One sense amplifier per cell.
  assign rd_vth = vth[rd_addr];
  for (genvar c = 0; c < CELLS; c++) begin : g_sa
    assign sensed[c*4 +: 4] = sense(rd_vth[c]);
  end

  // The row is sensed at the request; rd_valid marks it READ_LAT cycles later.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_pipe <= '0;
      rd_data <= '0;
    end else begin
      rd_pipe <= READ_LAT'({rd_pipe, rd_en});
      if (rd_en) rd_data <= sensed;
    end
  end
  assign rd_valid = rd_pipe[READ_LAT-1];

  // ------------------------------------------------ program-verify control
  logic             vfy_req, vfy_valid, pgm_req, pgm_ack, pv_done;
  logic [3:0]       vfy_level;
  logic [CELLS-1:0] vfy_pass, pgm_mask;
  logic [AW-1:0]    prow;

  pv_controller u_pv (
    .clk, .rst_n, .start(pgm_start && !pgm_busy), .target(pgm_data),
    .vfy_req, .vfy_level, .vfy_valid, .vfy_pass,
    .pgm_req, .pgm_mask, .pgm_ack,
    .busy(pgm_busy), .done(pv_done), .n_pulses(pgm_pulses)
  );
  assign pgm_done = pv_done;

  // Word-line driver: SRD during verify, SWR1/SWR2 during a pulse.
  typedef enum logic [1:0] {W_IDLE, W_VFY, W_PULSE} wstate_t;
  wstate_t     wst;
  logic [7:0]  wcnt;
  logic [31:0] lfsr;
  logic        srd, swr;
  logic [15:0] vrd_mv;

  assign srd    = (wst == W_VFY);
  assign swr    = (wst == W_PULSE) && hv_ready;
  assign vrd_mv = 16'(32'(vfy_level) * VFY_STEP_MV);
  assign hv_req = pgm_busy;

  wl_driver u_wld (
    .swr1(swr), .swr2(swr), .en(swr), .srd, .vps4_mv, .vrd_mv, .wl_mv,
    .prog_path()
  );

  // The row being programmed, and the same row after one pulse: each masked
  // cell rises by 30 to 60 mV.
  row_t prow_vth, pulsed;
  always_comb begin
    prow_vth = vth[prow];
    for (int c = 0; c < CELLS; c++)
      pulsed[c] = pgm_mask[c] ? prow_vth[c] + 8'd3 + 8'(lfsr[c % 31 +: 2]) : prow_vth[c];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wst       <= W_IDLE;
      wcnt      <= '0;
      prow      <= '0;
      vfy_valid <= 1'b0;
      vfy_pass  <= '0;
      pgm_ack   <= 1'b0;
      lfsr      <= SEED;
    end else begin
      vfy_valid <= 1'b0;
      pgm_ack   <= 1'b0;
      if (pgm_start && !pgm_busy) prow <= pgm_addr;
      case (wst)
        W_IDLE: begin
          wcnt <= '0;
          if (vfy_req) wst <= W_VFY;
          else if (pgm_req) wst <= W_PULSE;
        end
        W_VFY: begin
          wcnt <= wcnt + 8'd1;
          if (wcnt == 8'(VFY_LAT - 1)) begin
            for (int c = 0; c < CELLS; c++) vfy_pass[c] <= 32'(prow_vth[c]) * 10 >= 32'(wl_mv);
            vfy_valid <= 1'b1;
            wst <= W_IDLE;
          end
        end
        W_PULSE: if (hv_ready) begin
          wcnt <= wcnt + 8'd1;
          if (wcnt == 8'(PULSE_CYC - 1)) begin
            if (32'(wl_mv) >= VPGM_MIN_MV) vth[prow] <= pulsed;
            lfsr    <= {lfsr[30:0], lfsr[31] ^ lfsr[21] ^ lfsr[1] ^ lfsr[0]};
            pgm_ack <= 1'b1;
            wst     <= W_IDLE;
          end
        end
        default: wst <= W_IDLE;
      endcase
      if (erase && !pgm_busy) vth[pgm_addr] <= ERASED;
    end
  end

  // A bank serves one operation at a time.
  a_no_read_while_pgm: assert property (@(posedge clk) disable iff (!rst_n)
    rd_en |-> !pgm_busy);

endmodule
