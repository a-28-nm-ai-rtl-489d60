// input_buffer: the NMCU's 1024-byte input vector store.
//
// The host (CPU or DMA) writes and reads it as 256 little-endian 32-bit words
// over the system bus; bus reads return data the cycle after the request. The
// input fetcher reads one 128-byte segment (seg 0..7) combinationally, which is
// enough for inputs of up to 1024 elements (eight EFLASH reads).
// The 1024-byte size is the chip's; the word access and timing are this
// design's choice.
module input_buffer
  import nmcu_pkg::*;
#(
  parameter int unsigned BYTES = IB_BYTES
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           we,
  input  logic                           re,
  input  logic [$clog2(BYTES/4)-1:0]     addr,
  input  logic [31:0]                    wdata,
  output logic [31:0]                    rdata,
  input  logic [$clog2(BYTES/PE_LEN)-1:0] seg,
  output logic [VEC_W-1:0]               vec
);

  localparam int unsigned WORDS = BYTES / 4;
  localparam int unsigned SEG_WORDS = PE_LEN / 4;

  logic [31:0] mem [WORDS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < WORDS; i++) mem[i] <= '0;
      rdata <= '0;
    end else begin
      if (we) mem[addr] <= wdata;
      if (re) rdata <= mem[addr];
    end
  end

  always_comb begin
    for (int i = 0; i < SEG_WORDS; i++) vec[i*32 +: 32] = mem[int'(seg)*SEG_WORDS + i];
  end

endmodule
