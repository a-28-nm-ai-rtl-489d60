// wl_driver: behavioural model of the overstress-free word-line driver.
// This is an analog circuit; the model gives its function at the level of node
// voltages (integers in mV) and is not meant for synthesis.
//
// Program: with SWR1 and SWR2 high the word line is charged through the VPGM
// path to the program supply VPS4 (about 10 V while the pump runs). Verify and
// read: with SRD high the word line is charged to VRD. Because this driver also
// has a PMOS charging path, VRD reaches the word line without a threshold drop
// all the way up to VDDH; a request above VDDH is clipped there. Otherwise the
// word line is discharged to ground. EN (input kept for the real port list) and the internal nodes of the stacked
// transistors are not modelled. The word line settles at once.
// Which controls select which path follows the chip; the instant settling and
// the clipping are this model's simplifications.
module wl_driver #(
  parameter int unsigned VDDH_MV = 2500
) (
  input  logic        swr1,
  input  logic        swr2,
  input  logic        en,
  input  logic        srd,
  input  logic [15:0] vps4_mv,
  input  logic [15:0] vrd_mv,
  output logic [15:0] wl_mv,
  output logic        prog_path
);

  always_comb begin
    prog_path = swr1 && swr2;
    if (prog_path)                  wl_mv = vps4_mv;
    else if (srd)                   wl_mv = (vrd_mv > 16'(VDDH_MV)) ? 16'(VDDH_MV) : vrd_mv;
    else                            wl_mv = '0;
  end

  // Program and read selection are never asked for together.
  always_comb a_excl: assert (!(prog_path && srd));

endmodule
