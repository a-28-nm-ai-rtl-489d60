// input_fetcher: picks the 128 x int8 input vector for the PEs.
//
// in_sel = 0 takes the selected 128-byte segment of the input buffer (first
// layer); in_sel = 1 takes the active half of the ping-pong buffer, which holds
// the previous layer's results. The choice is registered when load is high, so
// the vector is stable at the PEs one cycle later. Selecting between the two
// buffers is the chip's; the output register is this design's choice.
module input_fetcher
  import nmcu_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             load,
  input  logic             in_sel,
  input  logic [VEC_W-1:0] ib_vec,
  input  logic [VEC_W-1:0] pp_vec,
  output logic [VEC_W-1:0] vec
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     vec <= '0;
    else if (load)  vec <= in_sel ? pp_vec : ib_vec;
  end

endmodule
