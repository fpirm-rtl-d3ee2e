// cim_slice -- the CIM unit of one nanowire N(i).
//
// The sense amplifier turns the TR level into threshold bits, the logic tree
// makes OR, AND, SUM, C and C' of them, and a source multiplexer picks what is
// sent to the local rowbuffer / written back to the nanowire:
//   SUM, OR, AND of this nanowire, the plain-read bits of the neighbours
//   N(i+1), N(i-1), N(i+8), N(i-8) (logical shifts by one and eight), the
//   carry C(i-1) of the nanowire below or the super carry C'(i-2) of the one
//   two below.  A second multiplexer keeps a bypass path for a plain read.
// C and C' of this nanowire leave towards N(i+1) and N(i+2); its plain-read
// bit leaves towards N(i+-1) and N(i+-8).  The set of sources and the two
// multiplexer levels are those printed in the paper's CIM-unit figure; the
// encoding of the select (cim_src_e) is this design's.  Purely combinational.
module cim_slice
  import fpirm_pkg::*;
(
  input  logic [CNT_W-1:0] level,   // TR level of this nanowire
  input  logic             ap_bit,  // domain under the addressed AP
  input  cim_src_e         src,
  input  logic             n_p1,    // plain-read bit of N(i+1)
  input  logic             n_m1,    // plain-read bit of N(i-1)
  input  logic             n_p8,    // plain-read bit of N(i+8)
  input  logic             n_m8,    // plain-read bit of N(i-8)
  input  logic             c_in,    // C of N(i-1)
  input  logic             cp_in,   // C' of N(i-2)
  output logic             rd_bit,  // plain-read bit to the neighbours
  output logic             c_out,   // C of this nanowire, to N(i+1)
  output logic             cp_out,  // C' of this nanowire, to N(i+2)
  output logic             out      // value for the rowbuffer / write-back
);
  logic [TRD-1:0] ones;
  logic or_b, and_b, sum_b;
  logic big_mux;

  tr_sense_amp #(.N_LVL(TRD)) u_sa (
    .level(level), .ap_bit(ap_bit), .ones(ones), .rd_bit(rd_bit)
  );

  cim_logic u_logic (
    .ones(ones), .or_o(or_b), .and_o(and_b), .sum_o(sum_b),
    .c_o(c_out), .cp_o(cp_out)
  );

  always_comb begin
    unique case (src)
      SRC_OR:  big_mux = or_b;
      SRC_AND: big_mux = and_b;
      SRC_SUM: big_mux = sum_b;
      SRC_C:   big_mux = c_in;
      SRC_CP:  big_mux = cp_in;
      SRC_NP1: big_mux = n_p1;
      SRC_NM1: big_mux = n_m1;
      SRC_NP8: big_mux = n_p8;
      SRC_NM8: big_mux = n_m8;
      default: big_mux = sum_b;
    endcase
    // second (bypass) multiplexer
    out = (src == SRC_BYPASS) ? rd_bit : big_mux;
  end
endmodule
