// tb_fpirm_subarray -- end-to-end test of a full-size subarray (15 plain
// tiles and one CIM tile, 16 DBCs of 512 x 32 each, default parameters).
//
// The testbench plays the host: it keeps track of where it has shifted each
// CIM-tile DBC and issues commands one at a time over cmd_valid/cmd_ready.
// Operation: eight-lane integer multiplication P = A * B of 8-bit operands,
// following the shift-and-add Multiply with CSA-Reduction and Add:
//   1. the host writes A and B into plain tiles 0 and 1 (through the global
//      rowbuffer), and moves them into the CIM tile;
//   2. for every bit i of A: the predicate is loaded from bit 0 of A, the
//      partial product row is cleared and B is copied into it under the
//      predicate, A is shifted right by one and B left by one;
//   3. CSA-Reduction turns partial products 0..6 into S, C<<1, C'<<2;
//   4. with the eighth partial product, a 16-bit Add sums the four rows;
//   5. the product row is stored into plain tile 2, read back, and shifted
//      right and left by eight positions through the CIM unit.
// Every lane's product is compared with A*B computed here.  The test also
// counts the mechanisms it exercised (host stalls during racetrack shifts,
// DBC shifts, predicate true / false, logical shifts by 1 and 8, TR
// operations, carry-chain steps) and fails if one never happened.
module tb_fpirm_subarray;
  import fpirm_pkg::*;
  localparam int W = ROW_W;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready;
  cmd_t cmd = '0;
  logic [W-1:0] grb_q, rb_q;
  logic [N_LANES-1:0] pred_q;

  fpirm_subarray dut (.clk(clk), .rst_n(rst_n), .cmd_valid(cmd_valid), .cmd_ready(cmd_ready),
    .cmd(cmd), .grb_q(grb_q), .rb_q(rb_q), .pred_q(pred_q));
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- mechanism counters ---------------------------------------------------
  int n_stall = 0, n_dbc_shift = 0, n_pred_true = 0, n_pred_false = 0;
  int n_shift1 = 0, n_shift8 = 0, n_tr = 0, n_add_step = 0, n_tile = 0, n_cycles = 0;
  always @(posedge clk) if (rst_n) begin
    if (cmd_valid && !cmd_ready) n_stall++;   // offered but not taken
    if (dut.d_valid && dut.d_ready && dut.d_cmd.op == OP_ADD_STEP) n_add_step++;
  end

  // ---- host side --------------------------------------------------------------
  int pos [N_DBC];
  localparam int DB = 0;

  task automatic send(cmd_t c);
    bit acc;
    @(negedge clk);
    cmd = c; cmd_valid = 1;
    do begin acc = cmd_ready; @(posedge clk); n_cycles++; @(negedge clk); end while (!acc);
    cmd_valid = 0;
    // wait for a plain-tile access / Add expansion to drain
    while (!cmd_ready) begin @(posedge clk); n_cycles++; n_stall++; @(negedge clk); end
    case (c.op)
      OP_SHIFT: n_dbc_shift++;
      OP_ROW: begin
        if (c.src inside {SRC_NP1, SRC_NM1}) n_shift1++;
        if (c.src inside {SRC_NP8, SRC_NM8}) n_shift8++;
        if (c.src inside {SRC_OR, SRC_AND, SRC_SUM, SRC_C, SRC_CP}) n_tr++;
      end
      OP_TILE_READ, OP_TILE_WRITE: n_tile++;
      default: ;
    endcase
  endtask

  function automatic cmd_t mk(op_e op);
    cmd_t c = '0;
    c.op = op; c.dbc = 4'(DB); c.lane_iso = 1'b1;
    return c;
  endfunction

  task automatic align(int r);
    cmd_t c = mk(OP_SHIFT);
    while (pos[DB] != r) begin
      c.dir = (r > pos[DB]);
      send(c);
      pos[DB] += c.dir ? 1 : -1;
    end
  endtask

  task automatic row(cim_src_e s, bit ap = 0);
    cmd_t c = mk(OP_ROW);
    c.src = s; c.ap = ap;
    send(c);
  endtask

  task automatic write_at(int r, bit pred = 0);
    cmd_t c = mk(OP_WRITE);
    c.pred_en = pred;
    align(r);
    send(c);
  endtask

  task automatic copy_row(int from, int to, cim_src_e s = SRC_BYPASS);
    align(from); row(s); write_at(to);
  endtask

  task automatic zero_row(int r);
    send(mk(OP_RB_RESET)); write_at(r);
  endtask

  task automatic tile_xfer(op_e op, int tile, int dbc, int r);
    cmd_t c = '0;
    c.op = op; c.tile = 4'(tile); c.dbc = 4'(dbc); c.row = ROW_AW'(r);
    send(c);
  endtask

  task automatic host_load(logic [W-1:0] v);
    cmd_t c = '0;
    c.op = OP_G_LOAD; c.data = v;
    send(c);
  endtask

  // ---- rows of the CIM DBC ------------------------------------------------------
  localparam int R_P   = 1;   // partial products P[0..7] at rows 1..8
  localparam int R_O   = 10;  // Add window O[0..6] at rows 10..16
  localparam int R_A   = 20;
  localparam int R_B   = 21;
  localparam int R_RES = 24;

  logic [7:0] a_val [N_LANES], b_val [N_LANES];
  logic [W-1:0] a_row, b_row, r;

  initial begin
    for (int d = 0; d < N_DBC; d++) pos[d] = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);

    a_row = '0; b_row = '0;
    for (int k = 0; k < N_LANES; k++) begin
      a_val[k] = 8'($urandom); b_val[k] = 8'($urandom);
      if (k == 0) a_val[k] = 8'hA5;          // both predicate values occur
      a_row[k*64 +: 8] = a_val[k]; b_row[k*64 +: 8] = b_val[k];
    end

    // 1. operands into plain tiles, then into the CIM tile
    host_load(a_row); tile_xfer(OP_TILE_WRITE, 0, 5, 17);
    host_load(b_row); tile_xfer(OP_TILE_WRITE, 1, 9, 30);
    host_load('0);
    tile_xfer(OP_TILE_READ, 0, 5, 17); send(mk(OP_RB_FROM_G)); write_at(R_A);
    tile_xfer(OP_TILE_READ, 1, 9, 30); send(mk(OP_RB_FROM_G)); write_at(R_B);
    align(R_A); row(SRC_BYPASS);
    checks++; if (rb_q !== a_row) begin failures++; $display("FAIL operand A transfer"); end

    // 2. predicated partial products
    for (int i = 0; i < 8; i++) begin
      cmd_t c;
      zero_row(R_P + i);
      align(R_A); row(SRC_BYPASS);
      c = mk(OP_PRED_LOAD); c.psrc = PSRC_B0; send(c);
      for (int k = 0; k < N_LANES; k++) if (pred_q[k]) n_pred_true++; else n_pred_false++;
      row(SRC_NP1); write_at(R_A);                 // A >>= 1
      align(R_B); row(SRC_BYPASS); write_at(R_P + i, 1);   // pred ? P[i] <- B
      align(R_B); row(SRC_NM1); write_at(R_B);     // B <<= 1
    end
    for (int i = 0; i < 8; i++) begin
      align(R_P + i); row(SRC_BYPASS);
      for (int k = 0; k < N_LANES; k++) begin
        checks++;
        if (rb_q[k*64 +: 64] !== (a_val[k][i] ? 64'(b_val[k]) << i : 64'd0)) begin
          failures++; $display("FAIL partial product %0d lane %0d", i, k);
        end
      end
    end

    // 3. CSA-Reduction of P[0..6] into O[1..3]; 4. P[7] -> O[4], O[5] = 0
    zero_row(R_O);
    zero_row(R_O + 6);
    zero_row(R_O + 5);
    align(R_P); row(SRC_SUM); write_at(R_O + 1);
    align(R_P); row(SRC_C);   write_at(R_O + 2);
    align(R_P); row(SRC_CP);  write_at(R_O + 3);
    copy_row(R_P + 7, R_O + 4);
    align(R_O);
    begin
      cmd_t c = mk(OP_ADD);
      int t0;
      c.bitpos = '0; c.width = BIT_AW'(16);
      t0 = n_add_step;
      send(c);
      @(posedge clk); #1;
      checks++;
      if (n_add_step - t0 != 16) begin failures++; $display("FAIL Add took %0d steps", n_add_step - t0); end
    end
    align(R_O); row(SRC_BYPASS);
    for (int k = 0; k < N_LANES; k++) begin
      checks++;
      if (rb_q[k*64 +: 16] !== 16'(a_val[k]) * 16'(b_val[k])) begin
        failures++;
        $display("FAIL product lane %0d: %0d * %0d got %0d", k, a_val[k], b_val[k], rb_q[k*64 +: 16]);
      end
    end

    // 5. product out to tile 2 and back to the host
    send(mk(OP_G_FROM_RB));
    tile_xfer(OP_TILE_WRITE, 2, 15, 31);
    host_load('0);
    tile_xfer(OP_TILE_READ, 2, 15, 31);
    for (int k = 0; k < N_LANES; k++) begin
      checks++;
      if (grb_q[k*64 +: 64] !== 64'(16'(a_val[k]) * 16'(b_val[k]))) begin
        failures++; $display("FAIL host read lane %0d", k);
      end
    end
    write_at(R_RES);                              // RB still holds the product
    align(R_RES); row(SRC_NP8); write_at(R_RES);  // >> 8
    align(R_RES); row(SRC_NM8);                   // << 8
    for (int k = 0; k < N_LANES; k++) begin
      logic [15:0] p;
      p = 16'(a_val[k]) * 16'(b_val[k]);
      checks++;
      if (rb_q[k*64 +: 64] !== 64'({p[15:8], 8'h00})) begin
        failures++; $display("FAIL byte shift lane %0d", k);
      end
    end

    // mechanism coverage
    $display("mechanisms: stall_cycles=%0d dbc_shifts=%0d pred_true=%0d pred_false=%0d shift1=%0d shift8=%0d tr_ops=%0d add_steps=%0d tile_accesses=%0d cycles=%0d",
             n_stall, n_dbc_shift, n_pred_true, n_pred_false, n_shift1, n_shift8, n_tr, n_add_step, n_tile, n_cycles);
    checks++; if (n_stall == 0)      begin failures++; $display("FAIL no stall"); end
    checks++; if (n_dbc_shift == 0)  begin failures++; $display("FAIL no DBC shift"); end
    checks++; if (n_pred_true == 0)  begin failures++; $display("FAIL no true predicate"); end
    checks++; if (n_pred_false == 0) begin failures++; $display("FAIL no false predicate"); end
    checks++; if (n_shift1 == 0)     begin failures++; $display("FAIL no shift by 1"); end
    checks++; if (n_shift8 == 0)     begin failures++; $display("FAIL no shift by 8"); end
    checks++; if (n_tr == 0)         begin failures++; $display("FAIL no TR op"); end
    checks++; if (n_add_step == 0)   begin failures++; $display("FAIL no carry-chain step"); end
    checks++; if (n_tile == 0)       begin failures++; $display("FAIL no plain-tile access"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
