// tb_cim_tile -- command-level check of the full-size CIM tile.
// Places seven random rows in the transverse-read window of one DBC and
// checks, against references computed here:
//   * bulk OR / AND / SUM (XOR) of the seven rows, and CSA-Reduction: the
//     three rows S, C<<1 and C'<<2 must add up to the sum of the seven rows
//     in every 64-bit word;
//   * Add of five operands: 64 carry-chain steps leave the sum of every
//     word in O[0]; and an 8-bit Add at bit offset 23 (the exponent field);
//   * logical shifts by +-1 and +-8 of a plain read, with word isolation;
//   * predicate loads from bits 0/31/47, predicated writes and resets;
//   * the shift position of the DBC.
module tb_cim_tile;
  import fpirm_pkg::*;
  localparam int W = ROW_W;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0;
  cmd_t cmd;
  logic [W-1:0] grb = '0, rb_q;
  logic [N_LANES-1:0] pred_q;
  logic [ROW_AW-1:0] pos_q [N_DBC];
  localparam int DB = 3;

  cim_tile dut (.clk(clk), .rst_n(rst_n), .cmd_valid(cmd_valid), .cmd(cmd),
    .grb_q(grb), .rb_q(rb_q), .pred_q(pred_q), .pos_q(pos_q));
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [W-1:0] rnd_row();
    logic [W-1:0] r;
    for (int i = 0; i < W; i += 32) r[i +: 32] = $urandom;
    return r;
  endfunction

  task automatic issue(cmd_t c);
    cmd <= c; cmd_valid <= 1;
    @(posedge clk);
    cmd_valid <= 0; cmd <= '0;
    #1;
  endtask

  function automatic cmd_t mk(op_e op);
    cmd_t c = '0;
    c.op = op; c.dbc = 4'(DB); c.lane_iso = 1'b1;
    return c;
  endfunction

  task automatic align(int r);
    cmd_t c = mk(OP_SHIFT);
    while (int'(pos_q[DB]) != r) begin
      c.dir = (r > int'(pos_q[DB]));
      issue(c);
    end
  endtask

  task automatic put_row(int r, logic [W-1:0] v);
    align(r);
    grb <= v; @(posedge clk); #1;
    issue(mk(OP_RB_FROM_G));
    issue(mk(OP_WRITE));
  endtask

  task automatic get_row(int r, output logic [W-1:0] v);
    cmd_t c = mk(OP_ROW);
    align(r);
    c.src = SRC_BYPASS;
    issue(c);
    v = rb_q;
  endtask

  task automatic row_op(cim_src_e s, logic ap, output logic [W-1:0] v);
    cmd_t c = mk(OP_ROW);
    c.src = s; c.ap = ap;
    issue(c);
    v = rb_q;
  endtask

  task automatic expect_row(string what, logic [W-1:0] got, logic [W-1:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: diff %h", what, got ^ exp);
    end
  endtask

  logic [W-1:0] op [7];
  logic [W-1:0] r, s_row, c_row, cp_row, exp;

  initial begin
    cmd = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk); #1;
    checks++; if (pos_q[DB] != 0) failures++;

    // ---------------- bulk ops and CSA-Reduction -----------------------------
    for (int k = 0; k < 7; k++) begin op[k] = rnd_row(); put_row(k, op[k]); end
    align(0);
    row_op(SRC_OR, 0, r);
    exp = op[0] | op[1] | op[2] | op[3] | op[4] | op[5] | op[6];
    expect_row("OR", r, exp);
    row_op(SRC_AND, 0, r);
    exp = op[0] & op[1] & op[2] & op[3] & op[4] & op[5] & op[6];
    expect_row("AND", r, exp);
    row_op(SRC_SUM, 0, s_row);
    exp = op[0] ^ op[1] ^ op[2] ^ op[3] ^ op[4] ^ op[5] ^ op[6];
    expect_row("SUM", s_row, exp);
    row_op(SRC_C, 0, c_row);
    row_op(SRC_CP, 0, cp_row);
    for (int k = 0; k < N_LANES; k++) begin
      logic [63:0] ref_sum, got;
      ref_sum = '0;
      for (int j = 0; j < 7; j++) ref_sum += op[j][k*64 +: 64];
      got = s_row[k*64 +: 64] + c_row[k*64 +: 64] + cp_row[k*64 +: 64];
      // carries out of bit 63 are cut by word isolation; compare modulo 2^64
      checks++;
      if (got !== ref_sum) begin failures++; $display("FAIL CSA word %0d", k); end
    end
    // plain read through AP1 (row 6)
    row_op(SRC_BYPASS, 1, r);
    expect_row("AP1 read", r, op[6]);

    // ---------------- Add of five operands (w = 64) ---------------------------
    begin
      logic [63:0] ref_sum [N_LANES];
      op[0] = '0; op[6] = '0;
      for (int j = 1; j <= 5; j++) op[j] = rnd_row();
      for (int k = 0; k < 7; k++) put_row(k, op[k]);
      for (int k = 0; k < N_LANES; k++) begin
        ref_sum[k] = '0;
        for (int j = 1; j <= 5; j++) ref_sum[k] += op[j][k*64 +: 64];
      end
      align(0);
      for (int b = 0; b < 64; b++) begin
        cmd_t c = mk(OP_ADD_STEP);
        c.bitpos = BIT_AW'(b); c.width = BIT_AW'(64);
        issue(c);
      end
      get_row(0, r);
      for (int k = 0; k < N_LANES; k++) begin
        checks++;
        if (r[k*64 +: 64] !== ref_sum[k]) begin
          failures++; $display("FAIL Add word %0d got %h exp %h", k, r[k*64 +: 64], ref_sum[k]);
        end
      end
    end

    // ---------------- 8-bit Add at offset 23 (exponent field) -----------------
    begin
      logic [7:0] ref_e [N_LANES];
      op[0] = '0; op[6] = '0;
      for (int j = 1; j <= 5; j++) begin
        op[j] = '0;
        for (int k = 0; k < N_LANES; k++) op[j][k*64 + 23 +: 8] = 8'($urandom);
      end
      for (int k = 0; k < 7; k++) put_row(k, op[k]);
      for (int k = 0; k < N_LANES; k++) begin
        ref_e[k] = '0;
        for (int j = 1; j <= 5; j++) ref_e[k] += op[j][k*64 + 23 +: 8];
      end
      align(0);
      for (int b = 23; b < 31; b++) begin
        cmd_t c = mk(OP_ADD_STEP);
        c.bitpos = BIT_AW'(b); c.width = BIT_AW'(31);
        issue(c);
      end
      get_row(0, r);
      for (int k = 0; k < N_LANES; k++) begin
        checks++;
        if (r[k*64 + 23 +: 8] !== ref_e[k]) begin
          failures++; $display("FAIL exp Add word %0d", k);
        end
      end
    end

    // ---------------- logical shifts ---------------------------------------------
    begin
      logic [W-1:0] v;
      v = rnd_row();
      put_row(10, v);
      align(10);
      row_op(SRC_NP1, 0, r);
      for (int k = 0; k < N_LANES; k++) exp[k*64 +: 64] = v[k*64 +: 64] >> 1;
      expect_row("shift right 1", r, exp);
      row_op(SRC_NM1, 0, r);
      for (int k = 0; k < N_LANES; k++) exp[k*64 +: 64] = v[k*64 +: 64] << 1;
      expect_row("shift left 1", r, exp);
      row_op(SRC_NP8, 0, r);
      for (int k = 0; k < N_LANES; k++) exp[k*64 +: 64] = v[k*64 +: 64] >> 8;
      expect_row("shift right 8", r, exp);
      row_op(SRC_NM8, 0, r);
      for (int k = 0; k < N_LANES; k++) exp[k*64 +: 64] = v[k*64 +: 64] << 8;
      expect_row("shift left 8", r, exp);
    end

    // ---------------- predication ----------------------------------------------
    for (int ps = 0; ps < 3; ps++) begin
      logic [W-1:0] sel_row, old_row, new_row;
      logic [N_LANES-1:0] pexp;
      cmd_t c;
      int bitp;
      bitp = (ps == 0) ? 0 : (ps == 1) ? 31 : 47;
      sel_row = rnd_row(); old_row = rnd_row(); new_row = rnd_row();
      put_row(12, old_row);
      put_row(11, sel_row);
      align(11);
      row_op(SRC_BYPASS, 0, r);
      c = mk(OP_PRED_LOAD); c.psrc = pred_src_e'(ps);
      issue(c);
      for (int k = 0; k < N_LANES; k++) pexp[k] = sel_row[k*64 + bitp];
      checks++; if (pred_q !== pexp) begin failures++; $display("FAIL pred load %0d", ps); end
      // predicated copy of new_row into row 12
      put_row(13, new_row);
      align(13);
      row_op(SRC_BYPASS, 0, r);
      align(12);
      c = mk(OP_WRITE); c.pred_en = 1'b1;
      issue(c);
      get_row(12, r);
      for (int k = 0; k < N_LANES; k++)
        exp[k*64 +: 64] = pexp[k] ? new_row[k*64 +: 64] : old_row[k*64 +: 64];
      expect_row("predicated write", r, exp);
      // predicated rowbuffer reset
      c = mk(OP_RB_RESET); c.pred_en = 1'b1;
      issue(c);
      for (int k = 0; k < N_LANES; k++) if (pexp[k]) exp[k*64 +: 64] = '0;
      expect_row("predicated reset", rb_q, exp);
    end
    issue(mk(OP_RB_RESET));
    expect_row("reset", rb_q, '0);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
