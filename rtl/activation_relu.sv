// activation_relu: the activation stage between quantization and write-back.
//
// With relu_en high every negative int8 result becomes zero; with relu_en low
// the results pass unchanged (for a final linear layer). The sixteen bytes are
// packed, lane 0 in the low byte, into the 128-bit word written back to the
// ping-pong buffer. Combinational. ReLU here is the chip's; the bypass is this
// design's choice.
module activation_relu
  import nmcu_pkg::*;
#(
  parameter int unsigned N = N_PE
) (
  input  logic                   relu_en,
  input  logic [N-1:0][IN_W-1:0] q,
  output logic [N*IN_W-1:0]      wb
);

  always_comb begin
    for (int i = 0; i < N; i++) begin
      wb[i*IN_W +: IN_W] = (relu_en && q[i][IN_W-1]) ? '0 : q[i];
    end
  end

endmodule
