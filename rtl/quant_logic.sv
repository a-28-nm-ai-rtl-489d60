// quant_logic: requantises the sixteen 32-bit PE sums to int8.
//
// Per lane i: s = acc[i] + bias[i] (32-bit), p = s * scale[i] (signed, 64-bit),
// r = (p + 2^(shift-1)) >>> shift (round half up; no rounding when shift = 0),
// q[i] = r saturated to [-128, 127]. The shift is one value shared by all lanes.
// Results are registered when en is high and appear the next cycle.
// The order bias, scale, shift and the per-channel 32-bit bias and scale are
// the chip's; rounding, saturation and the 64-bit product are this design's
// choices.
module quant_logic
  import nmcu_pkg::*;
#(
  parameter int unsigned N = N_PE
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          en,
  input  logic [N-1:0][ACC_W-1:0]       acc,
  input  logic [N-1:0][31:0]            bias,
  input  logic [N-1:0][31:0]            scale,
  input  logic [5:0]                    shift,
  output logic [N-1:0][IN_W-1:0]        q
);

  logic [N-1:0][IN_W-1:0] q_d;

  always_comb begin
    for (int i = 0; i < N; i++) begin
      logic signed [31:0] s;
      logic signed [63:0] p;
      logic signed [63:0] r;
      s = signed'(acc[i]) + signed'(bias[i]);
      p = 64'(s) * 64'(signed'(scale[i]));
      if (shift == 0) r = p;
      else            r = (p + (64'sd1 <<< (shift - 6'd1))) >>> shift;
      if (r > 64'sd127)       q_d[i] = 8'sd127;
      else if (r < -64'sd128) q_d[i] = -8'sd128;
      else                    q_d[i] = r[7:0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   q <= '0;
    else if (en)  q <= q_d;
  end

endmodule
