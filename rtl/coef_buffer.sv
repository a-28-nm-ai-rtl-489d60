// coef_buffer: sixteen 32-bit per-channel coefficients for the quantization
// logic. The NMCU has two: one holding biases, one holding scales.
//
// The host writes entries over the bus (we, waddr, wdata) and can read them back
// (rdata, one cycle after re). All entries are presented in parallel on q, one
// per output lane. The 16 x 32-bit size is the chip's; the bus access is this
// design's choice.
module coef_buffer
  import nmcu_pkg::*;
#(
  parameter int unsigned N = N_PE,
  parameter int unsigned W = 32
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  we,
  input  logic                  re,
  input  logic [$clog2(N)-1:0]  addr,
  input  logic [W-1:0]          wdata,
  output logic [W-1:0]          rdata,
  output logic [N-1:0][W-1:0]   q
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q     <= '0;
      rdata <= '0;
    end else begin
      if (we) q[addr] <= wdata;
      if (re) rdata <= q[addr];
    end
  end

endmodule
