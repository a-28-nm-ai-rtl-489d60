// weight_fetcher: routes the eight bank reads to the sixteen PEs.
//
// Each bank read holds 256 cell states (1024 bits). The lower 128 states go to
// PE 2b and the upper 128 to PE 2b+1, so each PE receives 512 bits. On the way
// each 4-bit state is turned into its signed weight with the state mapping
// table (state 0..15 -> weight -8..7). Purely combinational.
// The two-PEs-per-bank split and the mapping table are the chip's; which half
// goes to the even PE and doing the mapping here are this design's choices.
module weight_fetcher
  import nmcu_pkg::*;
#(
  parameter int unsigned NB = N_BANKS
) (
  input  logic [NB-1:0][BANK_W-1:0]   bank_data,
  output logic [2*NB-1:0][PE_W_W-1:0] pe_w
);

  for (genvar b = 0; b < NB; b++) begin : g_bank
    for (genvar h = 0; h < 2; h++) begin : g_half
      for (genvar i = 0; i < PE_LEN; i++) begin : g_cell
        assign pe_w[2*b + h][i*W_W +: W_W] =
          state_to_weight(bank_data[b][(h*PE_LEN + i)*4 +: 4]);
      end
    end
  end

endmodule
