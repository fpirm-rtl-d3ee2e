// local_rowbuffer -- the local rowbuffer of the CIM tile.
//
// A W-bit register that captures the output of the CIM unit (a plain or
// shifted read, or a TR result) or a row coming from the global rowbuffer,
// and supplies the data that is written back into the DBCs.  It can be reset
// to zero as a whole or, when the reset is predicated, only in the packed
// words whose predication bit is set ("pred ? RESET RB" in FindMax).  Loads
// and resets act at the clock edge; a load and a reset in the same cycle is
// not allowed (asserted).  Clearing it on reset is this design's choice.
module local_rowbuffer
  import fpirm_pkg::*;
#(
  parameter int unsigned W  = ROW_W,
  parameter int unsigned LW = LANE_W
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            load,
  input  logic [W-1:0]    d,
  input  logic            clear,
  input  logic            clear_pred_en,
  input  logic [W/LW-1:0] pred,
  output logic [W-1:0]    q
);
  localparam int unsigned NL = W / LW;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      q <= '0;
    end else if (load) begin
      q <= d;
    end else if (clear) begin
      for (int k = 0; k < int'(NL); k++)
        if (!clear_pred_en || pred[k]) q[k*LW +: LW] <= '0;
    end
  end

  a_no_load_and_clear: assert property (@(posedge clk) disable iff (!rst_n)
    !(load && clear));
endmodule
