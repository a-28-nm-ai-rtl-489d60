// pingpong_buffer: two 128-byte halves that carry results from one layer to
// the next without leaving the NMCU.
//
// Write-back stores the 16 int8 results of one command (128 bits) in slot
// wb_group (0..7) of half wb_half. The input fetcher reads a whole half
// (rd_half) as the next layer's 128-element input vector. The host can read
// either half over the bus as 32 words (address bit 5 picks the half); bus
// reads return data one cycle later. The bus port is read-only.
// Two 128-byte halves and the 128-bit write-back are the chip's; slot
// addressing and bus access are this design's choices.
module pingpong_buffer
  import nmcu_pkg::*;
(
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          wb_en,
  input  logic                          wb_half,
  input  logic [$clog2(PP_GROUPS)-1:0]  wb_group,
  input  logic [WB_W-1:0]               wb_data,
  input  logic                          rd_half,
  output logic [VEC_W-1:0]              vec,
  input  logic                          bus_re,
  input  logic [5:0]                    bus_addr,
  output logic [31:0]                   bus_rdata
);

  logic [1:0][PP_GROUPS-1:0][WB_W-1:0] mem;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mem       <= '0;
      bus_rdata <= '0;
    end else begin
      if (wb_en) mem[wb_half][wb_group] <= wb_data;
      if (bus_re) bus_rdata <= mem[bus_addr[5]][bus_addr[4:2]][bus_addr[1:0]*32 +: 32];
    end
  end

  assign vec = mem[rd_half];

endmodule
