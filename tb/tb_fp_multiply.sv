// tb_fp_multiply -- floating-point multiplication workload on a full-size
// subarray.
//
// Eight pairs of single-precision numbers (one per 64-bit word of a row) are
// multiplied entirely with subarray commands, following the FPMultiply flow:
//   M_A = (A AND 0x7FFFFF) OR 0x800000, likewise M_B (bulk AND / OR by
//       transverse read, the unused window rows padded with ones / zeros);
//   M = Multiply(M_A, M_B, 24): 24 predicated partial products, repeated
//       CSA-Reduction (7 -> 3) until five or fewer rows remain, then a
//       48-bit Add;
//   norm = bit 47 of M; under that predicate M is shifted right by one;
//   E = Add(A AND 0x7F800000, B AND 0x7F800000, 0xC0800000, norm ? 0x800000
//       : 0, 0) over 8 bits from bit 23 (adds -127 and the normalisation);
//   S = (A AND 0x80000000) XOR (B AND 0x80000000).
// The results are left decomposed, as the paper does for the following
// reduction.  Each field of each word is compared with integer arithmetic
// done here on the same operands.  The host role (loop control, row
// placement, DBC alignment) is played by this testbench.
module tb_fp_multiply;
  import fpirm_pkg::*;
  localparam int W = ROW_W;
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
    repeat (2000000) @(posedge clk);
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
  localparam int DV = 2;   // values: rows below
  localparam int DW = 1;   // scratch TR window at rows 0..6
  localparam int DP = 0;   // partial products
  localparam int DR = 3;   // reduction / Add window at rows 0..6
  localparam int R_ONES = 20, R_ZERO = 21;   // in DV

  // RB <- bulk op of rows x, y of DV, other window rows padded
  task automatic bulk2(cim_src_e s, int x, int y);
    int pad;
    pad = (s == SRC_AND) ? R_ONES : R_ZERO;
    copy(DV, x, DW, 0);
    copy(DV, y, DW, 1);
    for (int k = 2; k < 7; k++) copy(DV, pad, DW, k);
    rd(DW, 0, s);
  endtask

  // integer Multiply of DV rows a, b (w bits) into DV row dst
  task automatic multiply(int a, int b, int w, int dst);
    int live [$];
    int freer [$];
    copy(DV, a, DP, 30);
    copy(DV, b, DP, 31);
    for (int i = 0; i < w; i++) begin
      cmd_t c;
      send(mk(OP_RB_RESET, 0)); wr(DP, i);
      rd(DP, 30);
      c = mk(OP_PRED_LOAD, 0); c.psrc = PSRC_B0; send(c);
      rd(DP, 30, SRC_NP1); wr(DP, 30);          // O_A >>= 1
      rd(DP, 31); wr(DP, i, 1);                 // O_A[0] ? P[i] <- O_B
      rd(DP, 31, SRC_NM1); wr(DP, 31);          // O_B <<= 1
      live.push_back(i);
    end
    for (int r = w; r < 30; r++) freer.push_back(r);
    // CSA-Reduction rounds: seven (or six, zero padded) rows -> three
    while (live.size() > 5) begin
      int n;
      n = (live.size() >= 7) ? 7 : live.size();
      for (int k = 0; k < 7; k++) begin
        if (k < n) begin
          int r;
          r = live.pop_front();
          copy(DP, r, DR, k);
          freer.push_back(r);
        end else copy(DV, R_ZERO, DR, k);
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
    // Add of the remaining rows: O[0] = O[6] = 0
    copy(DV, R_ZERO, DR, 0);
    copy(DV, R_ZERO, DR, 6);
    for (int k = 1; k <= 5; k++) begin
      if (live.size() > 0) copy(DP, live.pop_front(), DR, k);
      else copy(DV, R_ZERO, DR, k);
    end
    begin
      cmd_t c = mk(OP_ADD, DR);
      c.bitpos = '0; c.width = BIT_AW'(2 * w);
      align(DR, 0);
      send(c);
    end
    copy(DR, 0, DV, dst);
  endtask

  // ---- operands and reference ---------------------------------------------------
  logic [31:0] fa [N_LANES], fb [N_LANES];
  logic [W-1:0] row_a, row_b, r;

  localparam int R_A = 0, R_B = 1, R_MA = 2, R_MB = 3, R_M = 4, R_EA = 5, R_EB = 6,
                 R_OFF = 7, R_ONE = 8, R_E = 9, R_SA = 10, R_SB = 11, R_S = 12, R_T = 13;
  localparam int R_K_MMASK = 14, R_K_HID = 15, R_K_EMASK = 16, R_K_SMASK = 17, R_K_BIT23 = 18;

  initial begin
    for (int d = 0; d < N_DBC; d++) pos[d] = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);

    row_a = '0; row_b = '0;
    for (int k = 0; k < N_LANES; k++) begin
      fa[k] = {1'($urandom), 8'($urandom_range(100, 150)), 23'($urandom)};
      fb[k] = {1'($urandom), 8'($urandom_range(100, 150)), 23'($urandom)};
      if (k == 0) begin fa[k][22:0] = '0; fb[k][22:0] = '0; end   // 1.0 x 1.0: no normalisation
      if (k == 1) begin fa[k][22:0] = '1; fb[k][22:0] = '1; end   // needs normalisation
      row_a[k*64 +: 32] = fa[k]; row_b[k*64 +: 32] = fb[k];
    end

    // constants and operands (the host writes them through the global rowbuffer)
    host_row(DV, R_ONES, '1);
    host_row(DV, R_ZERO, '0);
    host_row(DV, R_K_MMASK, rep(64'h7FFFFF));
    host_row(DV, R_K_HID,   rep(64'h800000));
    host_row(DV, R_K_EMASK, rep(64'h7F800000));
    host_row(DV, R_K_SMASK, rep(64'h80000000));
    host_row(DV, R_OFF,     rep(64'hC0800000));
    host_row(DV, R_A, row_a);
    host_row(DV, R_B, row_b);

    // mantissas with the hidden one
    bulk2(SRC_AND, R_A, R_K_MMASK); wr(DV, R_T);
    bulk2(SRC_OR, R_T, R_K_HID);    wr(DV, R_MA);
    bulk2(SRC_AND, R_B, R_K_MMASK); wr(DV, R_T);
    bulk2(SRC_OR, R_T, R_K_HID);    wr(DV, R_MB);

    multiply(R_MA, R_MB, 24, R_M);

    // normalisation: predicate from bit 47, predicated shift right by one
    begin
      cmd_t c;
      rd(DV, R_M);
      c = mk(OP_PRED_LOAD, 0); c.psrc = PSRC_B47; send(c);
      rd(DV, R_M, SRC_NP1); wr(DV, R_M, 1);
      // one <- norm ? 0x800000 : 0
      copy(DV, R_ZERO, DV, R_ONE);
      rd(DV, R_K_HID); wr(DV, R_ONE, 1);
    end

    // exponents
    bulk2(SRC_AND, R_A, R_K_EMASK); wr(DV, R_EA);
    bulk2(SRC_AND, R_B, R_K_EMASK); wr(DV, R_EB);
    copy(DV, R_ZERO, DR, 0);
    copy(DV, R_EA, DR, 1);
    copy(DV, R_EB, DR, 2);
    copy(DV, R_OFF, DR, 3);
    copy(DV, R_ONE, DR, 4);
    copy(DV, R_ZERO, DR, 5);
    copy(DV, R_ZERO, DR, 6);
    begin
      cmd_t c = mk(OP_ADD, DR);
      c.bitpos = BIT_AW'(23); c.width = BIT_AW'(8);
      align(DR, 0);
      send(c);
    end
    copy(DR, 0, DV, R_E);

    // sign
    bulk2(SRC_AND, R_A, R_K_SMASK); wr(DV, R_SA);
    bulk2(SRC_AND, R_B, R_K_SMASK); wr(DV, R_SB);
    bulk2(SRC_SUM, R_SA, R_SB);     wr(DV, R_S);

    // ---- check ---------------------------------------------------------------------
    begin
      logic [W-1:0] m_row, e_row, s_row;
      rd(DV, R_M); m_row = rb_q;
      rd(DV, R_E); e_row = rb_q;
      rd(DV, R_S); s_row = rb_q;
      for (int k = 0; k < N_LANES; k++) begin
        logic [47:0] prod;
        logic norm;
        logic [7:0] e;
        logic [63:0] m_exp;
        prod = 48'({1'b1, fa[k][22:0]}) * 48'({1'b1, fb[k][22:0]});
        norm = prod[47];
        m_exp = norm ? 64'(prod >> 1) : 64'(prod);
        e = 8'(int'(fa[k][30:23]) + int'(fb[k][30:23]) - 127 + int'(norm));
        checks++;
        if (m_row[k*64 +: 64] !== m_exp) begin
          failures++; $display("FAIL mantissa word %0d got %h exp %h", k, m_row[k*64 +: 64], m_exp);
        end
        checks++;
        if (e_row[k*64 + 23 +: 8] !== e) begin
          failures++; $display("FAIL exponent word %0d got %0d exp %0d", k, e_row[k*64 + 23 +: 8], e);
        end
        checks++;
        if (s_row[k*64 +: 64] !== {32'd0, fa[k][31] ^ fb[k][31], 31'd0}) begin
          failures++; $display("FAIL sign word %0d", k);
        end
        if (k < 2) begin
          checks++;
          if (norm != (k == 1)) begin failures++; $display("FAIL normalisation case %0d", k); end
        end
      end
    end
    $display("fp multiply of %0d word pairs took %0d cycles", N_LANES, n_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
