// tb_dbc -- checks a two-AP domain-block cluster at full size (512 x 32).
// Fills every data domain through AP0 while shifting up one domain per cycle,
// then walks back down comparing AP0, AP1 and the transverse-read level of
// every nanowire with a reference copy of the domains kept here.  Also checks
// masked writes through AP1 and that the position register follows shifts.
module tb_dbc;
  import fpirm_pkg::*;
  localparam int W = ROW_W, D = D_DOM, NDOM = D + TRD - 1;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic shift_en = 0, shift_dir = 0;
  logic [ROW_AW-1:0] pos;
  logic [W-1:0] ap0_q, ap1_q, ap0_we = '0, ap0_d = '0, ap1_we = '0, ap1_d = '0;
  logic [CNT_W-1:0] level [W];
  logic [W-1:0] ref_dom [NDOM];

  dbc dut (.clk(clk), .rst_n(rst_n), .shift_en(shift_en), .shift_dir(shift_dir),
    .pos(pos), .ap0_q(ap0_q), .ap1_q(ap1_q), .level(level),
    .ap0_we(ap0_we), .ap0_d(ap0_d), .ap1_we(ap1_we), .ap1_d(ap1_d));

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [W-1:0] rnd_row();
    logic [W-1:0] r;
    for (int i = 0; i < W; i += 32) r[i +: 32] = $urandom;
    return r;
  endfunction

  task automatic check_window(int p);
    int bad = 0;
    checks++;
    if (pos != ROW_AW'(p)) bad++;
    if (ap0_q !== ref_dom[p]) bad++;
    if (ap1_q !== ref_dom[p + TRD - 1]) bad++;
    for (int i = 0; i < W; i++) begin
      int n = 0;
      for (int r = 0; r < TRD; r++) n += int'(ref_dom[p + r][i]);
      if (int'(level[i]) != n) bad++;
    end
    if (bad != 0) begin
      failures++;
      $display("FAIL window at pos %0d (%0d mismatches)", p, bad);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    // fill overhead domains first through AP1 at pos 0..TRD-2? They are
    // reached only at the end: fill data domains via AP0 while shifting up.
    for (int p = 0; p < D; p++) begin
      ref_dom[p] = rnd_row();
      ap0_we <= '1; ap0_d <= ref_dom[p];
      shift_en <= (p < D - 1); shift_dir <= 1'b1;
      @(posedge clk);
    end
    ap0_we <= '0; shift_en <= 0;
    // at pos D-1 AP1 reaches the overhead domains: fill them, shifting down
    // is not needed since AP1 = pos + TRD - 1 covers D-1+1 .. by writing via
    // AP1 while walking down later; write them now through AP1 one by one.
    @(posedge clk);
    for (int p = D - 1; p >= 0; p--) begin
      if (p + TRD - 1 >= D) begin
        ref_dom[p + TRD - 1] = rnd_row();
        ap1_we <= '1; ap1_d <= ref_dom[p + TRD - 1];
      end else ap1_we <= '0;
      shift_en <= (p > 0); shift_dir <= 1'b0;
      @(posedge clk);
    end
    ap1_we <= '0; shift_en <= 0;
    @(posedge clk);
    // walk up checking every window
    for (int p = 0; p < D; p++) begin
      #1;
      check_window(p);
      shift_en <= (p < D - 1); shift_dir <= 1'b1;
      @(posedge clk);
    end
    shift_en <= 0;
    @(posedge clk);
    // masked write through AP1 at pos D-1, then masked AP0 write
    begin
      logic [W-1:0] m, v;
      m = rnd_row(); v = rnd_row();
      ap1_we <= m; ap1_d <= v;
      ref_dom[D - 1 + TRD - 1] = (ref_dom[D - 1 + TRD - 1] & ~m) | (v & m);
      @(posedge clk);
      ap1_we <= '0;
      m = rnd_row(); v = rnd_row();
      ap0_we <= m; ap0_d <= v;
      ref_dom[D - 1] = (ref_dom[D - 1] & ~m) | (v & m);
      @(posedge clk);
      ap0_we <= '0;
      #1;
      check_window(D - 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
