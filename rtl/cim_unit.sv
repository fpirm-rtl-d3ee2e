// cim_unit -- the row-wide CIM unit placed in front of the local rowbuffer of
// a CIM tile.
//
// It holds one cim_slice per nanowire (W = 512) and the wiring between them:
// plain-read bits to N(i+-1) and N(i+-8), carry C(i) to N(i+1) and super carry
// C'(i) to N(i+2).  Every slice has its own source select, so one cycle can
// send SUM to one nanowire, C to the next and C' to the one after, as the
// carry chain of Add needs, while bulk operations give all slices the same
// select.  Paths that leave the row read '0'.  With lane_iso set, paths that
// would cross the edge of a packed 64-bit word read '0' as well, so the eight
// words of a row are computed independently; the paper packs eight words per
// row but does not say how their edges are kept apart, so this switch is this
// design's choice.  Purely combinational.
module cim_unit
  import fpirm_pkg::*;
#(
  parameter int unsigned W    = ROW_W,
  parameter int unsigned LW   = LANE_W
) (
  input  logic [CNT_W-1:0] level  [W],  // TR level per nanowire
  input  logic [W-1:0]     ap_bits,     // plain read of the addressed AP
  input  cim_src_e         src    [W],  // per-slice source select
  input  logic             lane_iso,
  output logic [W-1:0]     out
);
  logic rd [W];
  logic c  [W];
  logic cp [W];

  for (genvar i = 0; i < int'(W); i++) begin : g_slice
    logic n_p1, n_m1, n_p8, n_m8, c_in, cp_in;
    // same-word test for each neighbour offset (constant per slice)
    localparam bit IN_P1 = (i + 1 < int'(W));
    localparam bit IN_M1 = (i >= 1);
    localparam bit IN_P8 = (i + 8 < int'(W));
    localparam bit IN_M8 = (i >= 8);
    localparam bit IN_M2 = (i >= 2);
    localparam bit SW_P1 = ((i + 1) / int'(LW)) == (i / int'(LW));
    localparam bit SW_M1 = ((i - 1) / int'(LW)) == (i / int'(LW)) && i >= 1;
    localparam bit SW_P8 = ((i + 8) / int'(LW)) == (i / int'(LW));
    localparam bit SW_M8 = ((i - 8) / int'(LW)) == (i / int'(LW)) && i >= 8;
    localparam bit SW_M2 = ((i - 2) / int'(LW)) == (i / int'(LW)) && i >= 2;

    if (IN_P1) begin : g_p1
      assign n_p1 = rd[i+1] & (SW_P1 | ~lane_iso);
    end else begin : g_p1z
      assign n_p1 = 1'b0;
    end
    if (IN_M1) begin : g_m1
      assign n_m1 = rd[i-1] & (SW_M1 | ~lane_iso);
      assign c_in = c[i-1]  & (SW_M1 | ~lane_iso);
    end else begin : g_m1z
      assign n_m1 = 1'b0;
      assign c_in = 1'b0;
    end
    if (IN_P8) begin : g_p8
      assign n_p8 = rd[i+8] & (SW_P8 | ~lane_iso);
    end else begin : g_p8z
      assign n_p8 = 1'b0;
    end
    if (IN_M8) begin : g_m8
      assign n_m8 = rd[i-8] & (SW_M8 | ~lane_iso);
    end else begin : g_m8z
      assign n_m8 = 1'b0;
    end
    if (IN_M2) begin : g_m2
      assign cp_in = cp[i-2] & (SW_M2 | ~lane_iso);
    end else begin : g_m2z
      assign cp_in = 1'b0;
    end

    cim_slice u_slice (
      .level (level[i]),
      .ap_bit(ap_bits[i]),
      .src   (src[i]),
      .n_p1  (n_p1),
      .n_m1  (n_m1),
      .n_p8  (n_p8),
      .n_m8  (n_m8),
      .c_in  (c_in),
      .cp_in (cp_in),
      .rd_bit(rd[i]),
      .c_out (c[i]),
      .cp_out(cp[i]),
      .out   (out[i])
    );
  end
endmodule
