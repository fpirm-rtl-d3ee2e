// tb_fp_add -- floating-point multi-operand addition workload on a
// full-size subarray.
//
// Seven products per 64-bit word, in the decomposed form the multiplication
// leaves them (mantissa with its leading one at bit 46, exponent field in bits
// 30:23, sign in bit 31, each in its own row), are summed with subarray
// commands following the FPAdd flow:
//   FindMax: for eight rounds, OR of the seven exponents by transverse read;
//       for each exponent, pred = isAnyOne AND NOT exponent, tested at bit
//       31; the exponent is rewritten shifted left by one and, under the
//       predicate, the rewritten row is reset; at the end the OR of the
//       survivors, shifted right by eight, is the largest exponent;
//   NormMantissa: Max - E by an Add of Max, E XOR 0xFF800000 and 0x800000
//       over nine bits from bit 23; difference bits 7 and 6 zero the
//       mantissa, bits 5..3 give 4/2/1 predicated shifts right by eight and
//       bits 2..0 4/2/1 predicated shifts right by one;
//   negative operands are inverted under their sign predicate and a row
//   holding 1 is added beside them (two's complement);
//   the 14 rows are reduced by CSA-Reduction (7 -> 3) to five or fewer and
//   summed by a 64-bit Add;
//   NormSum: the sign (bit 63, brought to bit 31 by four shifts right by
//   eight) predicates inversion and +1; a scan from bit 62 down with
//   seenOne / seenThisOne / seenOneFirst rows finds the leading one, records
//   the exponent offset under the seenOneFirst predicate and shifts the
//   mantissa one place per step under the seenOne predicate until the
//   leading one is at bit 23; the offset is added to the exponent, the
//   leading one stripped and sign, exponent and mantissa ORed together.
// The result of every word is compared with an integer model of the same
// arithmetic (alignment by truncation, no rounding) and with the exact sum
// in floating point.
module tb_fp_add;
  import fpirm_pkg::*;
  localparam int W = ROW_W;
  localparam int N = 7;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready;
  cmd_t cmd = '0;
  logic [W-1:0] grb_q, rb_q;
  logic [N_LANES-1:0] pred_q;
  int n_cycles = 0;

  fpirm_subarray dut (.clk(clk), .rst_n(rst_n), .cmd_valid(cmd_valid), .cmd_ready(cmd_ready),
    .cmd(cmd), .grb_q(grb_q), .rb_q(rb_q), .pred_q(pred_q));
  always #5 clk = ~clk;

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- host primitives ------------------------------------------------------------
  int pos [N_DBC];

  task automatic send(cmd_t c);
    bit acc;
    @(negedge clk);
    cmd = c; cmd_valid = 1;
    do begin acc = cmd_ready; @(posedge clk); n_cycles++; @(negedge clk); end while (!acc);
    cmd_valid = 0;
    while (!cmd_ready) begin @(posedge clk); n_cycles++; @(negedge clk); end
  endtask

  function automatic cmd_t mk(op_e op, int d);
    cmd_t c = '0;
    c.op = op; c.dbc = 4'(d); c.lane_iso = 1'b1;
    return c;
  endfunction

  task automatic align(int d, int r);
    cmd_t c = mk(OP_SHIFT, d);
    while (pos[d] != r) begin
      c.dir = (r > pos[d]);
      send(c);
      pos[d] += c.dir ? 1 : -1;
    end
  endtask

  // RB <- source applied at row r of DBC d (AP0)
  task automatic rd(int d, int r, cim_src_e s = SRC_BYPASS);
    cmd_t c = mk(OP_ROW, d);
    c.src = s;
    align(d, r);
    send(c);
  endtask

  task automatic wr(int d, int r, bit pred = 0);
    cmd_t c = mk(OP_WRITE, d);
    c.pred_en = pred;
    align(d, r);
    send(c);
  endtask

  task automatic host_row(int d, int r, logic [W-1:0] v);
    cmd_t c = '0;
    c.op = OP_G_LOAD; c.data = v;
    send(c);
    send(mk(OP_RB_FROM_G, 0));
    wr(d, r);
  endtask

  task automatic copy(int d0, int r0, int d1, int r1);
    rd(d0, r0); wr(d1, r1);
  endtask

  function automatic logic [W-1:0] rep(logic [63:0] v);
    logic [W-1:0] r;
    for (int k = 0; k < N_LANES; k++) r[k*64 +: 64] = v;
    return r;
  endfunction

  // DBC roles
  localparam int DV  = 2;   // values and constants
  localparam int DA  = 1;   // AND window: rows 2..6 hold ones
  localparam int DO  = 4;   // OR / XOR window: rows 2..6 hold zeros
  localparam int DE  = 5;   // exponents E[0..6] at rows 0..6
  localparam int DM  = 6;   // two's complement mantissa rows m[0..13]
  localparam int DR  = 3;   // reduction / Add window at rows 0..6
  localparam int DP  = 0;   // spare rows for reduction results

  // rows of DV
  localparam int R_ONES = 0, R_ZERO = 1, R_K_EINV = 2, R_K_BIT23 = 3, R_K_MMASK = 4,
                 R_K_SMASK = 5, R_K_ONE = 6, R_ANY = 7, R_T = 8, R_T2 = 9, R_MAX = 10,
                 R_SUM = 11, R_SGN = 12, R_MP = 13, R_SEEN = 14, R_EXPADD = 15, R_KOFF = 16,
                 R_D = 17, R_E = 18, R_RES = 19;
  // mantissas M[0..6] and signs S[0..6] rows of DV
  localparam int R_M0 = 20;          // 20..26
  // signs in DP rows 24..30

  task automatic bulk2(cim_src_e s, int dx, int x, int dy, int y);
    int d;
    d = (s == SRC_AND) ? DA : DO;
    copy(dx, x, d, 0);
    copy(dy, y, d, 1);
    rd(d, 0, s);
  endtask

  task automatic pred_from(pred_src_e p);
    cmd_t c = mk(OP_PRED_LOAD, 0);
    c.psrc = p;
    send(c);
  endtask

  task automatic add_window(int l, int w);
    cmd_t c = mk(OP_ADD, DR);
    c.bitpos = BIT_AW'(l); c.width = BIT_AW'(w);
    align(DR, 0);
    send(c);
  endtask

  // operands and reference
  logic [46:0] m_in [N_LANES][N];
  logic [7:0]  e_in [N_LANES][N];
  logic        s_in [N_LANES][N];
  logic [31:0] res_ref [N_LANES];
  real         exact [N_LANES];

  function automatic real p2(int e);
    real v = 1.0;
    if (e >= 0) for (int i = 0; i < e; i++) v = v * 2.0;
    else for (int i = 0; i < -e; i++) v = v / 2.0;
    return v;
  endfunction

  function automatic void reference();
    for (int k = 0; k < N_LANES; k++) begin
      logic [7:0] emax;
      logic signed [63:0] acc;
      logic [63:0] mag;
      logic sgn;
      int lead;
      logic [63:0] mant;
      emax = 0;
      exact[k] = 0.0;
      for (int i = 0; i < N; i++) begin
        if (e_in[k][i] > emax) emax = e_in[k][i];
        exact[k] += (s_in[k][i] ? -1.0 : 1.0) * real'(m_in[k][i]) * p2(int'(e_in[k][i]) - 127 - 46);
      end
      acc = 0;
      for (int i = 0; i < N; i++) begin
        int d;
        logic [63:0] a;
        d = int'(emax) - int'(e_in[k][i]);
        a = (d >= 64) ? 64'd0 : (64'(m_in[k][i]) >> d);
        acc = s_in[k][i] ? acc - $signed(a) : acc + $signed(a);
      end
      sgn = acc[63];
      mag = sgn ? 64'(-acc) : 64'(acc);
      lead = 0;
      for (int b = 0; b < 63; b++) if (mag[b]) lead = b;
      mant = (lead > 23) ? (mag >> (lead - 23)) : (mag << (23 - lead));
      res_ref[k] = {sgn, 8'(int'(emax) + lead - 46), mant[22:0]};
    end
  endfunction

  function automatic real fp32_value(logic [31:0] f);
    return (f[31] ? -1.0 : 1.0) * real'({1'b1, f[22:0]}) * p2(int'(f[30:23]) - 127 - 23);
  endfunction

  logic [W-1:0] row;

  initial begin
    for (int d = 0; d < N_DBC; d++) pos[d] = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);

    for (int k = 0; k < N_LANES; k++)
      for (int i = 0; i < N; i++) begin
        m_in[k][i] = {1'b1, 46'({$urandom, $urandom})};
        e_in[k][i] = 8'($urandom_range(120, 135));
        s_in[k][i] = 1'($urandom);
      end
    e_in[0][3] = 8'd40;                        // far below the maximum: zeroed
    for (int i = 0; i < N; i++) s_in[1][i] = 1'b1;  // all negative
    for (int i = 0; i < N; i++) s_in[2][i] = 1'b0;  // all positive: carry above bit 47
    reference();

    // constants
    host_row(DV, R_ONES, '1);
    host_row(DV, R_ZERO, '0);
    host_row(DV, R_K_EINV,  rep(64'hFF800000));
    host_row(DV, R_K_BIT23, rep(64'h800000));
    host_row(DV, R_K_MMASK, rep(64'h7FFFFF));
    host_row(DV, R_K_SMASK, rep(64'h80000000));
    host_row(DV, R_K_ONE,   rep(64'h1));
    for (int r = 2; r < 7; r++) begin copy(DV, R_ONES, DA, r); copy(DV, R_ZERO, DO, r); end
    // operands: exponents into the FindMax window, mantissas and signs in DV / DP
    for (int i = 0; i < N; i++) begin
      for (int k = 0; k < N_LANES; k++) row[k*64 +: 64] = 64'(e_in[k][i]) << 23;
      host_row(DE, i, row);
      for (int k = 0; k < N_LANES; k++) row[k*64 +: 64] = 64'(m_in[k][i]);
      host_row(DV, R_M0 + i, row);
      for (int k = 0; k < N_LANES; k++) row[k*64 +: 64] = 64'(s_in[k][i]) << 31;
      host_row(DP, 24 + i, row);
    end

    // ---------------- FindMax over E[0..6] ----------------------------------------
    for (int rnd = 0; rnd < 8; rnd++) begin
      rd(DE, 0, SRC_OR); wr(DV, R_ANY);                       // isAnyOne
      for (int j = 0; j < N; j++) begin
        bulk2(SRC_SUM, DE, j, DV, R_ONES); wr(DV, R_T);       // nIsOne
        bulk2(SRC_AND, DV, R_T, DV, R_ANY);                   // pred
        pred_from(PSRC_B31);
        rd(DE, j, SRC_NM1);                                   // RB <- E[j] << 1
        begin cmd_t c = mk(OP_RB_RESET, 0); c.pred_en = 1; send(c); end
        wr(DE, j);
      end
    end
    rd(DE, 0, SRC_OR); wr(DV, R_T);
    rd(DV, R_T, SRC_NP8); wr(DV, R_MAX);                      // >> 8
    rd(DV, R_MAX);
    for (int k = 0; k < N_LANES; k++) begin
      logic [7:0] emax;
      emax = 0;
      for (int i = 0; i < N; i++) if (e_in[k][i] > emax) emax = e_in[k][i];
      checks++;
      if (rb_q[k*64 +: 64] !== 64'(emax) << 23) begin
        failures++; $display("FAIL FindMax word %0d got %h exp %0d", k, rb_q[k*64 +: 64], emax);
      end
    end

    // ---------------- NormMantissa and two's complement ------------------------------
    for (int i = 0; i < N; i++) begin
      for (int k = 0; k < N_LANES; k++) row[k*64 +: 64] = 64'(e_in[k][i]) << 23;
      host_row(DV, R_E, row);                                 // host copy of E[i]
      bulk2(SRC_SUM, DV, R_E, DV, R_K_EINV); wr(DV, R_T);     // t = E XOR 0xFF800000
      copy(DV, R_ZERO, DR, 0); copy(DV, R_MAX, DR, 1); copy(DV, R_T, DR, 2);
      copy(DV, R_K_BIT23, DR, 3); copy(DV, R_ZERO, DR, 4); copy(DV, R_ZERO, DR, 5);
      copy(DV, R_ZERO, DR, 6);
      add_window(23, 9);
      copy(DR, 0, DV, R_D);                                   // S = Max - E at 31:23
      copy(DV, R_M0 + i, DV, R_MP);
      // bit 31 is the ninth (borrow) bit; shift once so difference bit 7 is at 31
      rd(DV, R_D, SRC_NM1); wr(DV, R_D);
      for (int b = 7; b >= 0; b--) begin
        rd(DV, R_D); pred_from(PSRC_B31);
        rd(DV, R_D, SRC_NM1); wr(DV, R_D);
        if (b >= 6) begin
          send(mk(OP_RB_RESET, 0)); wr(DV, R_MP, 1);          // out of range: M <- 0
        end else begin
          int reps;
          reps = 1 << (b % 3);
          for (int q = 0; q < reps; q++) begin
            rd(DV, R_MP, (b >= 3) ? SRC_NP8 : SRC_NP1); wr(DV, R_MP, 1);
          end
        end
      end
      // m[2i] = S ? ~M : M ; m[2i+1] = S ? 1 : 0
      rd(DP, 24 + i); pred_from(PSRC_B31);
      bulk2(SRC_SUM, DV, R_MP, DV, R_ONES); wr(DV, R_MP, 1);
      copy(DV, R_MP, DM, 2 * i);
      copy(DV, R_ZERO, DM, 2 * i + 1);
      rd(DV, R_K_ONE); wr(DM, 2 * i + 1, 1);
    end

    // ---------------- mantissa reduction and Add ---------------------------------------
    begin
      int live [$];
      int freer [$];
      for (int r = 0; r < 2 * N; r++) live.push_back(100 + r);   // 100+r = DM row r
      for (int r = 0; r < 24; r++) freer.push_back(r);            // DP rows
      while (live.size() > 5) begin
        int n;
        n = (live.size() >= 7) ? 7 : live.size();
        for (int q = 0; q < 7; q++) begin
          if (q < n) begin
            int r;
            r = live.pop_front();
            if (r >= 100) copy(DM, r - 100, DR, q); else begin copy(DP, r, DR, q); freer.push_back(r); end
          end else copy(DV, R_ZERO, DR, q);
        end
        begin
          int o [3];
          for (int j = 0; j < 3; j++) o[j] = freer.pop_front();
          rd(DR, 0, SRC_SUM); wr(DP, o[0]);
          rd(DR, 0, SRC_C);   wr(DP, o[1]);
          rd(DR, 0, SRC_CP);  wr(DP, o[2]);
          for (int j = 0; j < 3; j++) live.push_back(o[j]);
        end
      end
      copy(DV, R_ZERO, DR, 0);
      copy(DV, R_ZERO, DR, 6);
      for (int q = 1; q <= 5; q++) begin
        if (live.size() > 0) begin
          int r;
          r = live.pop_front();
          if (r >= 100) copy(DM, r - 100, DR, q); else copy(DP, r, DR, q);
        end else copy(DV, R_ZERO, DR, q);
      end
      add_window(0, 64);
      copy(DR, 0, DV, R_SUM);
    end

    // ---------------- NormSum ------------------------------------------------------------
    // sign: bit 63 moved to bit 31 by four shifts right by eight
    copy(DV, R_SUM, DV, R_SGN);
    for (int q = 0; q < 4; q++) begin rd(DV, R_SGN, SRC_NP8); wr(DV, R_SGN); end
    rd(DV, R_SGN); pred_from(PSRC_B31);
    bulk2(SRC_SUM, DV, R_SUM, DV, R_ONES); wr(DV, R_SUM, 1);  // invert when negative
    copy(DV, R_SUM, DR, 1);
    copy(DV, R_ZERO, DR, 2);
    rd(DV, R_SGN); pred_from(PSRC_B31);
    rd(DV, R_K_ONE); wr(DR, 2, 1);                            // + 1 when negative
    copy(DV, R_ZERO, DR, 0); copy(DV, R_ZERO, DR, 3); copy(DV, R_ZERO, DR, 4);
    copy(DV, R_ZERO, DR, 5); copy(DV, R_ZERO, DR, 6);
    add_window(0, 64);
    copy(DR, 0, DV, R_SUM);
    // leading-one scan: m holds M >> 15 so that bit 62 of M sits at bit 47
    copy(DV, R_SUM, DV, R_MP);
    rd(DV, R_MP, SRC_NP8); wr(DV, R_MP);
    for (int q = 0; q < 7; q++) begin rd(DV, R_MP, SRC_NP1); wr(DV, R_MP); end
    copy(DV, R_ZERO, DV, R_SEEN);
    copy(DV, R_ZERO, DV, R_EXPADD);
    for (int q = 62; q >= 0; q--) begin
      // left shift before the 1 is seen (uses seenOne before this bit)
      if (q <= 22) begin
        bulk2(SRC_SUM, DV, R_SEEN, DV, R_ONES);               // nSeenOne
        pred_from(PSRC_B47);
        rd(DV, R_SUM, SRC_NM1); wr(DV, R_SUM, 1);
      end
      bulk2(SRC_OR, DV, R_MP, DV, R_SEEN); wr(DV, R_T);       // seenThisOne
      bulk2(SRC_SUM, DV, R_T, DV, R_SEEN); wr(DV, R_T2);      // seenOneFirst
      pred_from(PSRC_B47);
      host_row(DV, R_KOFF, rep(64'(8'(q - 46)) << 23));
      rd(DV, R_KOFF); wr(DV, R_EXPADD, 1);                    // expAdd <- q - 46
      copy(DV, R_T, DV, R_SEEN);                              // seenOne <- seenThisOne
      if (q >= 24) begin
        rd(DV, R_SEEN); pred_from(PSRC_B47);
        rd(DV, R_SUM, SRC_NP1); wr(DV, R_SUM, 1);             // right shift once seen
      end
      rd(DV, R_MP, SRC_NM1); wr(DV, R_MP);
    end
    // exponent: E + expAdd over 8 bits from bit 23
    copy(DV, R_ZERO, DR, 0); copy(DV, R_MAX, DR, 1); copy(DV, R_EXPADD, DR, 2);
    copy(DV, R_ZERO, DR, 3); copy(DV, R_ZERO, DR, 4); copy(DV, R_ZERO, DR, 5);
    copy(DV, R_ZERO, DR, 6);
    add_window(23, 8);
    copy(DR, 0, DV, R_E);
    // recombine: (M AND 0x7FFFFF) OR E OR (sign AND 0x80000000)
    bulk2(SRC_AND, DV, R_SUM, DV, R_K_MMASK); wr(DV, R_T);
    bulk2(SRC_AND, DV, R_SGN, DV, R_K_SMASK); wr(DV, R_T2);
    copy(DV, R_T, DO, 0); copy(DV, R_E, DO, 1); copy(DV, R_T2, DO, 2);
    rd(DO, 0, SRC_OR); wr(DV, R_RES);
    copy(DV, R_ZERO, DO, 2);
    rd(DV, R_RES);
    for (int k = 0; k < N_LANES; k++) begin
      logic [31:0] got;
      real rel;
      got = rb_q[k*64 +: 32];
      checks++;
      if (rb_q[k*64 +: 64] !== 64'(res_ref[k])) begin
        failures++; $display("FAIL sum word %0d got %h exp %h", k, rb_q[k*64 +: 64], res_ref[k]);
      end
      rel = (fp32_value(got) - exact[k]) / exact[k];
      if (rel < 0) rel = -rel;
      checks++;
      if (rel > 1.0e-5) begin
        failures++; $display("FAIL sum word %0d relative error %g", k, rel);
      end
    end
    $display("fp add of %0d operands in %0d words took %0d cycles", N, N_LANES, n_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
