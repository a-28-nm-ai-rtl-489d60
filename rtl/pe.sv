// pe: one processing element of the NMCU.
//
// Each cycle with en high it forms the dot product of a 128-element int8 input
// vector and 128 signed 4-bit weights (one half of a bank read) and adds it to
// a 32-bit accumulator; clear starts a new sum with this read instead of adding.
// Several reads in succession therefore build a dot product longer than 128.
// The dot product is a combinational adder tree and the accumulator is updated
// on the same clock edge, so acc is valid the cycle after the last en.
// Signed int8 inputs with zero point 0 and the single-cycle tree are this
// design's choice; 128 elements per read, 4-bit weights and the 32-bit result
// are the chip's.
module pe
  import nmcu_pkg::*;
#(
  parameter int unsigned LEN   = PE_LEN,
  parameter int unsigned ACC_W_P = ACC_W
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      en,
  input  logic                      clear,
  input  logic [LEN*IN_W-1:0]       x,
  input  logic [LEN*W_W-1:0]        w,
  output logic signed [ACC_W_P-1:0] acc
);

  logic signed [ACC_W_P-1:0] dot;

  always_comb begin
    dot = '0;
    for (int i = 0; i < LEN; i++) begin
      dot += ACC_W_P'(signed'(x[i*IN_W +: IN_W]) * signed'(w[i*W_W +: W_W]));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      acc <= '0;
    else if (en)     acc <= clear ? dot : acc + dot;
  end

endmodule
