// tb_weight_rotate -- 180-degree rotation of weight kernels, as needed in
// back-propagation, on a full-size subarray.
//
// Eight kernels (one per 64-bit word) of K x K signed 8-bit weights are
// stored one kernel row per memory row, weight j of a row in byte j of the
// word.  Rotating by 180 degrees mirrors both axes: output row r is input row
// K-1-r with its bytes reversed.  The vertical mirror is only a choice of
// destination row.  The horizontal one is done with compute commands: byte j
// is isolated by a bulk AND with a mask row, moved K-1-2j bytes up or down by
// repeated logical shifts by eight (word edges isolated), and the K moved
// bytes are recombined by one transverse-read OR of K rows (the window rows
// left over hold zeros).  Kernels of size 3, 5 and 7 are rotated, the last
// filling the whole seven-row window of the OR.  Every output word is
// compared with the rotation done here on the stored weights, and the number
// of commands per kernel size is reported.
//
// The mask / shift / OR method is the one the FPIRM description gives for this
// step; the byte packing and the row layout are this testbench's choices.
module tb_weight_rotate;
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
    repeat (400000) @(posedge clk);
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
  localparam int DV = 2;   // weights, masks, results
  localparam int DA = 1;   // AND window: rows 2..6 hold ones
  localparam int DO = 4;   // OR window: rows 0..6 loaded per OR
  localparam int DT = 3;   // shifted bytes of one kernel row
  localparam int R_ONES = 0, R_ZERO = 1, R_MASK0 = 2;   // masks 2..8
  localparam int R_IN0 = 10, R_OUT0 = 20;

  logic [7:0] wgt [N_LANES][7][7];
  logic [W-1:0] row;

  task automatic rotate(int kk);
    for (int r = 0; r < kk; r++) begin
      for (int j = 0; j < kk; j++) begin
        int sh;
        copy(DV, R_IN0 + r, DA, 0);
        copy(DV, R_MASK0 + j, DA, 1);
        rd(DA, 0, SRC_AND);                          // RB <- byte j of the row
        wr(DT, j);
        sh = kk - 1 - 2 * j;                         // bytes to move up (< 0: down)
        for (int q = 0; q < (sh < 0 ? -sh : sh); q++) begin
          rd(DT, j, sh > 0 ? SRC_NM8 : SRC_NP8); wr(DT, j);
        end
      end
      for (int q = 0; q < 7; q++) if (q < kk) copy(DT, q, DO, q); else copy(DV, R_ZERO, DO, q);
      rd(DO, 0, SRC_OR);
      wr(DV, R_OUT0 + (kk - 1 - r));                 // vertical mirror by placement
    end
  endtask

  initial begin
    for (int d = 0; d < N_DBC; d++) pos[d] = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);

    host_row(DV, R_ONES, '1);
    host_row(DV, R_ZERO, '0);
    for (int j = 0; j < 7; j++) host_row(DV, R_MASK0 + j, rep(64'hFF << (8 * j)));
    for (int r = 2; r < 7; r++) copy(DV, R_ONES, DA, r);

    for (int kk = 3; kk <= 7; kk += 2) begin
      int c0;
      for (int k = 0; k < N_LANES; k++)
        for (int r = 0; r < 7; r++)
          for (int j = 0; j < 7; j++) wgt[k][r][j] = 8'($urandom);
      for (int r = 0; r < kk; r++) begin
        row = '0;
        for (int k = 0; k < N_LANES; k++)
          for (int j = 0; j < kk; j++) row[k*64 + 8*j +: 8] = wgt[k][r][j];
        host_row(DV, R_IN0 + r, row);
      end
      c0 = n_cycles;
      rotate(kk);
      $display("%0dx%0d rotation of 8 kernels: %0d cycles", kk, kk, n_cycles - c0);
      for (int r = 0; r < kk; r++) begin
        rd(DV, R_OUT0 + r);
        for (int k = 0; k < N_LANES; k++) begin
          logic [63:0] expw;
          expw = '0;
          for (int j = 0; j < kk; j++) expw[8*j +: 8] = wgt[k][kk - 1 - r][kk - 1 - j];
          checks++;
          if (rb_q[k*64 +: 64] !== expw) begin
            failures++;
            $display("FAIL K=%0d row %0d word %0d got %h exp %h", kk, r, k, rb_q[k*64 +: 64], expw);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
