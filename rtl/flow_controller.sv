// flow_controller: sequences one matrix-vector multiply (MVM) command.
//
// A command (nmcu_pkg::mvm_cmd_t) asks for 16 outputs over nreads x 128 inputs.
// For read r = 0..nreads-1 the controller issues one EFLASH read of word line
// wl_base + r on all banks and loads input segment in_seg + r (or the ping-pong
// half) into the input fetcher, waits for the banks' rd_valid, and in that
// cycle lets the PEs add the read (clearing them on r = 0). After the last read
// it registers the quantized results (QUANT) and writes the 128-bit word back
// to the ping-pong buffer (WB), pulsing done and, if asked, swap.
//
// Timing: start is taken in IDLE only. With a bank read latency of L cycles a
// command takes nreads x (L + 1) + 2 cycles from start to done.
// Stepping the word-line address for long inputs from a single command is the
// chip's; the command fields, the state sequence and the non-overlapped reads
// are this design's choices.
module flow_controller
  import nmcu_pkg::*;
(
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         start,
  input  mvm_cmd_t                     cmd,
  // EFLASH read port, shared word line for all banks
  output logic                         fl_rd_en,
  output logic [ROW_W-1:0]             fl_addr,
  input  logic                         fl_rd_valid,
  // input fetcher
  output logic                         if_load,
  output logic                         if_sel,
  output logic [$clog2(IB_SEGS)-1:0]   ib_seg,
  // PEs, quantization, write-back
  output logic                         pe_en,
  output logic                         pe_clear,
  output logic                         q_en,
  output logic [5:0]                   shift,
  output logic                         relu_en,
  output logic                         wb_en,
  output logic [$clog2(PP_GROUPS)-1:0] wb_group,
  output logic                         swap,
  output logic                         busy,
  output logic                         done
);

  typedef enum logic [2:0] {S_IDLE, S_RD, S_WAIT, S_QUANT, S_WB} state_t;

  state_t   state;
  mvm_cmd_t c;
  logic [2:0] r;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      c     <= '0;
      r     <= '0;
    end else begin
      case (state)
        S_IDLE:  if (start) begin c <= cmd; r <= '0; state <= S_RD; end
        S_RD:    state <= S_WAIT;
        S_WAIT:  if (fl_rd_valid) begin
                   if (r == c.nreads_m1) state <= S_QUANT;
                   else begin r <= r + 3'd1; state <= S_RD; end
                 end
        S_QUANT: state <= S_WB;
        S_WB:    state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    fl_rd_en = (state == S_RD);
    fl_addr  = c.wl_base + ROW_W'(r);
    if_load  = (state == S_RD);
    if_sel   = c.in_sel;
    ib_seg   = c.in_seg + r;
    pe_en    = (state == S_WAIT) && fl_rd_valid;
    pe_clear = (r == '0);
    q_en     = (state == S_QUANT);
    shift    = c.shift;
    relu_en  = c.relu_en;
    wb_en    = (state == S_WB);
    wb_group = c.out_group;
    swap     = (state == S_WB) && c.swap;
    busy     = (state != S_IDLE);
    done     = (state == S_WB);
  end

  // The banks answer only the read this controller asked for.
  a_valid_expected: assert property (@(posedge clk) disable iff (!rst_n)
    fl_rd_valid |-> state == S_WAIT);

endmodule
