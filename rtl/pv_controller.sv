// pv_controller: program-verify sequencer for one row of 4-bit cells.
//
// A row of 256 cells is programmed from the erased state (state 0) to its 256
// target states by walking the states in order: S1 first, then for each state k
// a verify read at level k, and while any cell aimed at state k or above has
// not reached level k, a program pulse on exactly those cells followed by
// another verify read. When all such cells pass, the next state is taken; after
// S15 the row is done. Cells aimed below k are never pulsed for level k.
//
// Interface: start with the target states (4 bits per cell); vfy_req/vfy_level
// ask the array for a verify read and vfy_valid/vfy_pass bring one bit per
// cell (threshold at or above the level); pgm_req/pgm_mask ask for one pulse
// and pgm_ack ends it. done is a one-cycle pulse; busy is high in between.
// The state order and the verify/pulse loop follow the chip's program-verify
// flow; parallel programming of a whole row with per-cell masking is this
// design's choice. As in that flow there is no pulse limit.
module pv_controller
  import nmcu_pkg::*;
#(
  parameter int unsigned N = CELLS
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [N*4-1:0]   target,
  output logic             vfy_req,
  output logic [3:0]       vfy_level,
  input  logic             vfy_valid,
  input  logic [N-1:0]     vfy_pass,
  output logic             pgm_req,
  output logic [N-1:0]     pgm_mask,
  input  logic             pgm_ack,
  output logic             busy,
  output logic             done,
  output logic [15:0]      n_pulses
);

  typedef enum logic [2:0] {P_IDLE, P_VFY, P_WVFY, P_PROG, P_WPGM, P_END} pstate_t;

  pstate_t    st;
  logic [3:0] k;
  logic [N*4-1:0] tgt;
  logic [N-1:0]   fail;

  // Cells aimed at state k or higher that have not reached verify level k.
  always_comb begin
    for (int c = 0; c < N; c++) fail[c] = (tgt[c*4 +: 4] >= k) && !vfy_pass[c];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st       <= P_IDLE;
      k        <= 4'd1;
      tgt      <= '0;
      pgm_mask <= '0;
      n_pulses <= '0;
    end else begin
      case (st)
        P_IDLE: if (start) begin               // Program start -> S1 State
          tgt <= target; k <= 4'd1; n_pulses <= '0; st <= P_VFY;
        end
        P_VFY:  st <= P_WVFY;                  // Verify Read
        P_WVFY: if (vfy_valid) begin           // Done?
          if (|fail) begin pgm_mask <= fail; st <= P_PROG; end   // No -> Prog
          else if (k == 4'd15) st <= P_END;    // S15 State? Yes -> End
          else begin k <= k + 4'd1; st <= P_VFY; end              // Next State
        end
        P_PROG: st <= P_WPGM;                  // Prog
        P_WPGM: if (pgm_ack) begin n_pulses <= n_pulses + 16'd1; st <= P_VFY; end
        P_END:  st <= P_IDLE;
        default: st <= P_IDLE;
      endcase
    end
  end

  assign vfy_req   = (st == P_VFY);
  assign vfy_level = k;
  assign pgm_req   = (st == P_PROG);
  assign busy      = (st != P_IDLE);
  assign done      = (st == P_END);

endmodule
