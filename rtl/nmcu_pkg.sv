// nmcu_pkg: sizes, types and helpers shared by the near-memory computing unit
// (NMCU) and the 4-bit/cell EFLASH bank model.
//
// The sizes follow the chip: eight EFLASH banks, each returning 256 4-bit cell
// states (1024 bits) per read; sixteen processing elements, two per bank, each
// taking 128 weights and a 128 x int8 input vector; a 1024-byte input buffer and
// a 2 x 128-byte ping-pong buffer. The 4 Mb array gives 512 word lines per bank.
// The command layout, the bus address map and the mapping helpers below are
// this design's own choices where the chip description gives no detail.
package nmcu_pkg;

  localparam int unsigned N_BANKS     = 8;     // EFLASH banks
  localparam int unsigned CELLS       = 256;   // 4-bit cells per bank read
  localparam int unsigned BANK_W      = CELLS * 4;        // 1024 bits
  localparam int unsigned ROWS        = 512;   // 4 Mb / 8 banks / 1024 b
  localparam int unsigned ROW_W       = $clog2(ROWS);
  localparam int unsigned N_PE        = 2 * N_BANKS;      // 16
  localparam int unsigned PE_LEN      = CELLS / 2;        // 128 elements per PE
  localparam int unsigned IN_W        = 8;     // int8 activations
  localparam int unsigned W_W         = 4;     // 4-bit weights
  localparam int unsigned ACC_W       = 32;    // PE result width
  localparam int unsigned VEC_W       = PE_LEN * IN_W;    // 1024-bit input vector
  localparam int unsigned PE_W_W      = PE_LEN * W_W;     // 512-bit weight slice
  localparam int unsigned IB_BYTES    = 1024;  // input buffer
  localparam int unsigned IB_SEGS     = IB_BYTES / PE_LEN; // 8 segments of 128 B
  localparam int unsigned PP_BYTES    = 128;   // one ping-pong half
  localparam int unsigned WB_W        = N_PE * IN_W;      // 128-bit write-back
  localparam int unsigned PP_GROUPS   = PP_BYTES / N_PE;  // 8 slots of 16 B
  localparam int unsigned N_STATES    = 16;    // 4 bits per cell

  // One matrix-vector command: 16 outputs over NREADS x 128 inputs.
  typedef struct packed {
    logic [5:0]       shift;     // right shift after the scale multiply
    logic             swap;      // toggle the ping-pong halves when done
    logic             relu_en;   // apply ReLU to the results
    logic [2:0]       out_group; // 16-byte slot of the ping-pong half written
    logic [2:0]       in_seg;    // first 128-byte input-buffer segment
    logic             in_sel;    // 0: input buffer, 1: ping-pong buffer
    logic [2:0]       nreads_m1; // number of EFLASH reads minus one (1..8)
    logic [ROW_W-1:0] wl_base;   // first word line
  } mvm_cmd_t;                   // 27 bits, bits [26:0] of the command word

  // Bus address map (byte addresses, 32-bit words).
  localparam logic [11:0] A_IB    = 12'h000; // 0x000-0x3FF input buffer
  localparam logic [11:0] A_PP    = 12'h400; // 0x400-0x4FF ping-pong (read)
  localparam logic [11:0] A_BIAS  = 12'h500; // 0x500-0x53F bias[16]
  localparam logic [11:0] A_SCALE = 12'h540; // 0x540-0x57F scale[16]
  localparam logic [11:0] A_CMD   = 12'h580; // write: start a command
  localparam logic [11:0] A_STAT  = 12'h584; // read: {pp_sel, done, busy}
  localparam logic [11:0] A_PPSEL = 12'h588; // read/write: ping-pong select

  // Cell state to weight (state mapping table): state 0..15 holds weight
  // -8..7, so neighbouring states differ by one. In two's complement this is
  // the state with its top bit inverted.
  function automatic logic signed [W_W-1:0] state_to_weight(input logic [3:0] s);
    return signed'({~s[3], s[2:0]});
  endfunction

  function automatic logic [3:0] weight_to_state(input logic signed [W_W-1:0] w);
    return {~w[3], w[2:0]};
  endfunction

endpackage
