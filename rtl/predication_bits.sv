// predication_bits -- predication register of the CIM tile.
//
// One bit per packed word of the row (eight 64-bit words in a 512-bit row).
// On `load` every bit takes a copy of one position of its own word in the
// local rowbuffer: bit 0 (multiplication), bit 31 (FindMax, NormMantissa,
// sign) or bit 47 (mantissa normalisation) -- the three positions the paper
// says the predicate is ever taken from.  The bits then gate predicated
// writes and rowbuffer resets word by word.  One bit per word and the clear
// on reset are this design's reading of "the least significant bit of each
// packed operand must have a connection to the predication register".
// Loads take effect at the next clock edge.
module predication_bits
  import fpirm_pkg::*;
#(
  parameter int unsigned W  = ROW_W,
  parameter int unsigned LW = LANE_W
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            load,
  input  pred_src_e       psrc,
  input  logic [W-1:0]    rb,
  output logic [W/LW-1:0] pred
);
  localparam int unsigned NL = W / LW;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      pred <= '0;
    end else if (load) begin
      for (int k = 0; k < int'(NL); k++) begin
        unique case (psrc)
          PSRC_B0:  pred[k] <= rb[k*LW + 0];
          PSRC_B31: pred[k] <= rb[k*LW + 31];
          PSRC_B47: pred[k] <= rb[k*LW + 47];
          default:  pred[k] <= 1'b0;
        endcase
      end
    end
  end
endmodule
