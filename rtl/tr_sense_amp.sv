// tr_sense_amp -- digital side of the sense amplifier SA(i) of one nanowire.
//
// A transverse read (TR) passes a current through all TRD domains between the
// two access points of a nanowire; its resistance level tells how many of
// those domains hold a '1'.  The amplifier compares that level with TRD
// references and drives the threshold bits ones[k] = (level > k), k = 0..TRD-1,
// which the CIM logic uses (7 bits for TRD = 7, as printed in the figure of the
// CIM unit).  It also passes on the single domain under the addressed access
// point for a plain read (the bypass path).
//
// The analog resistance sensing is not modelled: the racetrack model (dbc)
// delivers the level as a binary count.  The comparison against references
// follows the paper; representing the level as a count is this design's choice.
// Purely combinational.
module tr_sense_amp
  import fpirm_pkg::*;
#(
  parameter int unsigned N_LVL = TRD
) (
  input  logic [$clog2(N_LVL+1)-1:0] level,   // number of '1' domains in the TR window
  input  logic                       ap_bit,  // domain under the addressed AP
  output logic [N_LVL-1:0]           ones,    // ones[k] = level > k
  output logic                       rd_bit   // plain (bypass) read
);
  always_comb begin
    for (int k = 0; k < int'(N_LVL); k++)
      ones[k] = (int'(level) > k);
  end
  assign rd_bit = ap_bit;
endmodule
