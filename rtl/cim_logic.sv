// cim_logic -- multi-operand logic of one nanowire from its TR threshold bits.
//
// With ones[k] = (number of '1's among 7 domains) > k, the paper derives every
// result with 2:1 multiplexers:
//   M0  = ones[1] ? ones[2] : ones[0]
//   M1  = ones[5] ? ones[6] : ones[4]
//   SUM = ones[3] ? M1 : M0             (XOR of the 7 operands)
//   C   = ones[3] ? ones[5] : ones[1]   (bit 1 of the count)
//   C'  = ones[3]                       (bit 2 of the count, "super carry")
//   OR  = ones[0], AND = ones[6]
// so that count = SUM + 2*C + 4*C'.  The structure is the paper's, for
// TRD = 7; it is written for that distance only.  Purely combinational.
module cim_logic (
  input  logic [6:0] ones,
  output logic       or_o,
  output logic       and_o,
  output logic       sum_o,
  output logic       c_o,
  output logic       cp_o
);
  logic m0, m1;
  always_comb begin
    m0    = ones[1] ? ones[2] : ones[0];
    m1    = ones[5] ? ones[6] : ones[4];
    sum_o = ones[3] ? m1 : m0;
    c_o   = ones[3] ? ones[5] : ones[1];
    cp_o  = ones[3];
    or_o  = ones[0];
    and_o = ones[6];
  end
endmodule
