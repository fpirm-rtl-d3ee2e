// dbc -- domain-block cluster: W racetrack nanowires that shift together.
//
// Each nanowire holds D data domains plus TRD-1 overhead domains so that any
// data domain can be brought under an access point without losing data.  The
// cluster is modelled as an array of D+TRD-1 rows of W bits and a position
// register `pos` that says which row sits under access point AP0; a shift
// moves every nanowire by one domain (pos +- 1) in one cycle.  Row pos is
// under AP0 and, when TWO_AP is set, row pos+TRD-1 under AP1.  Both ports
// read combinationally and write at the clock edge with a per-nanowire write
// mask.  With two APs the cluster also performs a transverse read: for every
// nanowire, `level` is the number of '1's among the TRD domains from AP0 to
// AP1 inclusive.
//
// From the paper: nanowires shifted together, D data domains (16/32/64; 32 is
// used so that 16 DBCs make a 512-row tile), overhead domains, AP0/AP1 spaced
// by the transverse read distance, TR counting ones between them.  This
// design's choices: one domain per shift per cycle, the TR window including
// both AP domains, the position register starting at 0 after reset, and the
// domains themselves not being reset (racetrack memory is non-volatile).
module dbc
  import fpirm_pkg::*;
#(
  parameter int unsigned W      = ROW_W,
  parameter int unsigned D      = D_DOM,
  parameter int unsigned TRDIST = TRD,
  parameter bit          TWO_AP = 1'b1
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           shift_en,
  input  logic                           shift_dir,  // 1: pos+1, 0: pos-1
  output logic [ROW_AW-1:0]              pos,
  output logic [W-1:0]                   ap0_q,
  output logic [W-1:0]                   ap1_q,
  output logic [$clog2(TRDIST+1)-1:0]    level [W],
  input  logic [W-1:0]                   ap0_we,
  input  logic [W-1:0]                   ap0_d,
  input  logic [W-1:0]                   ap1_we,
  input  logic [W-1:0]                   ap1_d
);
  localparam int unsigned NDOM = D + TRDIST - 1;
  localparam int unsigned LW   = $clog2(TRDIST + 1);

  logic [W-1:0] dom [NDOM];
  logic [ROW_AW-1:0] pos_ap1;

  assign pos_ap1 = pos + ROW_AW'(TRDIST - 1);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      pos <= '0;
    end else if (shift_en) begin
      if (shift_dir) pos <= pos + 1'b1;
      else           pos <= pos - 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (|ap0_we) dom[pos] <= (dom[pos] & ~ap0_we) | (ap0_d & ap0_we);
    if (TWO_AP && |ap1_we) dom[pos_ap1] <= (dom[pos_ap1] & ~ap1_we) | (ap1_d & ap1_we);
  end

  assign ap0_q = dom[pos];

  if (TWO_AP) begin : g_tr
    // The TRD rows of the window, then one ones-counter per nanowire.
    logic [W-1:0] win [TRDIST];
    assign ap1_q = dom[pos_ap1];
    for (genvar r = 0; r < int'(TRDIST); r++) begin : g_win
      assign win[r] = dom[pos + ROW_AW'(r)];
    end
    for (genvar i = 0; i < int'(W); i++) begin : g_cnt
      always_comb begin
        level[i] = '0;
        for (int r = 0; r < int'(TRDIST); r++) level[i] = level[i] + LW'(win[r][i]);
      end
    end
  end else begin : g_no_tr
    assign ap1_q = '0;
    for (genvar i = 0; i < int'(W); i++) begin : g_cnt
      assign level[i] = '0;
    end
  end

  // A shift must keep AP0 on a data domain.
  a_pos_range: assert property (@(posedge clk) disable iff (!rst_n)
    shift_en |-> (shift_dir ? (pos < ROW_AW'(D - 1)) : (pos != '0)));
  // Both AP writes of one cycle may not hit the same domain.
  a_two_ap_conflict: assert property (@(posedge clk) disable iff (!rst_n)
    !(|ap0_we && |ap1_we && pos == pos_ap1));
endmodule
