// cim_tile -- the CIM-augmented tile of a subarray (the last tile).
//
// N_DBC domain-block clusters with two access points each share one CIM unit,
// one local rowbuffer and the predication bits.  The tile executes one
// command per cycle (it is always ready):
//   OP_SHIFT     shift DBC `dbc` by one domain (dir = 1: pos+1)
//   OP_ROW       RB <- CIM unit output with every slice on source `src`:
//                plain read of AP `ap`, logical shift by +-1 / +-8 of it, or
//                OR / AND / SUM / C(i-1) / C'(i-2) of the TR window
//   OP_WRITE     row at AP `ap` <- RB; with pred_en only in the packed words
//                whose predication bit is set
//   OP_ADD_STEP  one step of the Add carry chain at bit b = `bitpos` of every
//                packed word, upper bound u = `width`: S_b -> AP0 of N_b,
//                C_b -> AP1 of N_b+1 (if b+1 < u), C'_b -> AP0 of N_b+2 (if
//                b+2 < u), all in the same cycle
//   OP_PRED_LOAD predication bits <- RB bit 0, 31 or 47 of each word
//   OP_RB_RESET  RB <- 0 (pred_en: only words whose predicate is set)
//   OP_RB_FROM_G RB <- global rowbuffer
// Results are visible at the outputs one clock edge after the command.
//
// The parts (two-AP DBCs, CIM unit, local rowbuffer, predication bits) and
// the operations follow the paper; the command set and the one-cycle timing
// of every command are this design's, since the paper gives no command
// interface or cycle counts beyond "Add takes w cycles".
module cim_tile
  import fpirm_pkg::*;
#(
  parameter int unsigned W     = ROW_W,
  parameter int unsigned D     = D_DOM,
  parameter int unsigned NDBC  = N_DBC
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cmd_valid,
  input  cmd_t              cmd,
  input  logic [W-1:0]      grb_q,     // global rowbuffer
  output logic [W-1:0]      rb_q,      // local rowbuffer
  output logic [W/LANE_W-1:0] pred_q,  // predication bits
  output logic [ROW_AW-1:0] pos_q [NDBC]  // shift position of every DBC
);
  localparam int unsigned NL = W / LANE_W;

  // ---- DBCs ---------------------------------------------------------------
  logic [W-1:0]     ap0_q [NDBC];
  logic [W-1:0]     ap1_q [NDBC];
  logic [CNT_W-1:0] lvl   [NDBC][W];
  logic [W-1:0]     ap0_we, ap1_we, wdata0, wdata1;

  for (genvar g = 0; g < int'(NDBC); g++) begin : g_dbc
    logic sel;
    assign sel = cmd_valid && (cmd.dbc == 4'(g));
    dbc #(.W(W), .D(D), .TRDIST(TRD), .TWO_AP(1'b1)) u_dbc (
      .clk      (clk),
      .rst_n    (rst_n),
      .shift_en (sel && cmd.op == OP_SHIFT),
      .shift_dir(cmd.dir),
      .pos      (pos_q[g]),
      .ap0_q    (ap0_q[g]),
      .ap1_q    (ap1_q[g]),
      .level    (lvl[g]),
      .ap0_we   (sel ? ap0_we : '0),
      .ap0_d    (wdata0),
      .ap1_we   (sel ? ap1_we : '0),
      .ap1_d    (wdata1)
    );
  end

  // ---- CIM unit -----------------------------------------------------------
  logic [CNT_W-1:0] level_sel [W];
  logic [W-1:0]     ap_bits;
  cim_src_e         src_vec [W];
  logic [W-1:0]     cim_out;
  logic             lane_iso;

  always_comb begin
    ap_bits = cmd.ap ? ap1_q[cmd.dbc] : ap0_q[cmd.dbc];
    for (int i = 0; i < int'(W); i++) level_sel[i] = lvl[cmd.dbc][i];
  end

  // per-slice select and write masks
  always_comb begin
    int loc;
    int b;
    int u;
    b = int'(cmd.bitpos);
    u = int'(cmd.width);
    lane_iso = cmd.lane_iso;
    ap0_we   = '0;
    ap1_we   = '0;
    for (int i = 0; i < int'(W); i++) begin
      loc = i % int'(LANE_W);
      src_vec[i] = SRC_BYPASS;
      if (cmd.op == OP_ADD_STEP) begin
        if (loc == b && b < u) begin
          src_vec[i] = SRC_SUM;  ap0_we[i] = 1'b1;
        end else if (loc == b + 1 && b + 1 < u) begin
          src_vec[i] = SRC_C;    ap1_we[i] = 1'b1;
        end else if (loc == b + 2 && b + 2 < u) begin
          src_vec[i] = SRC_CP;   ap0_we[i] = 1'b1;
        end
      end else begin
        src_vec[i] = cmd.src;
      end
    end
    if (cmd.op == OP_ADD_STEP) lane_iso = 1'b1;
    if (cmd.op == OP_WRITE) begin
      for (int k = 0; k < int'(NL); k++)
        if (!cmd.pred_en || pred_q[k]) begin
          if (cmd.ap) ap1_we[k*LANE_W +: LANE_W] = '1;
          else        ap0_we[k*LANE_W +: LANE_W] = '1;
        end
    end
  end

  assign wdata0 = (cmd.op == OP_WRITE) ? rb_q : cim_out;
  assign wdata1 = (cmd.op == OP_WRITE) ? rb_q : cim_out;

  cim_unit #(.W(W), .LW(LANE_W)) u_cim (
    .level   (level_sel),
    .ap_bits (ap_bits),
    .src     (src_vec),
    .lane_iso(lane_iso),
    .out     (cim_out)
  );

  // ---- local rowbuffer and predication --------------------------------------
  logic rb_load;
  logic [W-1:0] rb_d;
  assign rb_load = cmd_valid && (cmd.op == OP_ROW || cmd.op == OP_RB_FROM_G);
  assign rb_d    = (cmd.op == OP_RB_FROM_G) ? grb_q : cim_out;

  local_rowbuffer #(.W(W), .LW(LANE_W)) u_rb (
    .clk          (clk),
    .rst_n        (rst_n),
    .load         (rb_load),
    .d            (rb_d),
    .clear        (cmd_valid && cmd.op == OP_RB_RESET),
    .clear_pred_en(cmd.pred_en),
    .pred         (pred_q),
    .q            (rb_q)
  );

  predication_bits #(.W(W), .LW(LANE_W)) u_pred (
    .clk  (clk),
    .rst_n(rst_n),
    .load (cmd_valid && cmd.op == OP_PRED_LOAD),
    .psrc (cmd.psrc),
    .rb   (rb_q),
    .pred (pred_q)
  );

  a_add_bounds: assert property (@(posedge clk) disable iff (!rst_n)
    (cmd_valid && cmd.op == OP_ADD_STEP) |-> (cmd.bitpos < cmd.width && cmd.width <= BIT_AW'(LANE_W)));
endmodule
