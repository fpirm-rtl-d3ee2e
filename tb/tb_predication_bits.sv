// tb_predication_bits -- loads the predication bits from bit 0, 31 and 47 of
// every 64-bit word of random rows and compares with the bits picked here;
// also checks that the bits hold when not loaded and clear on reset.
module tb_predication_bits;
  import fpirm_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, load = 0;
  pred_src_e psrc = PSRC_B0;
  logic [ROW_W-1:0] rb = '0;
  logic [N_LANES-1:0] pred, exp;

  predication_bits dut (.clk(clk), .rst_n(rst_n), .load(load), .psrc(psrc), .rb(rb), .pred(pred));
  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    #1; checks++; if (pred !== '0) failures++;
    rst_n = 1;
    for (int it = 0; it < 60; it++) begin
      int pos;
      for (int i = 0; i < ROW_W; i += 32) rb[i +: 32] = $urandom;
      psrc = pred_src_e'(it % 3);
      pos = (it % 3 == 0) ? 0 : (it % 3 == 1) ? 31 : 47;
      for (int k = 0; k < N_LANES; k++) exp[k] = rb[k*64 + pos];
      load = 1;
      @(posedge clk); #1;
      load = 0;
      checks++;
      if (pred !== exp) begin failures++; $display("FAIL src=%0d pred=%b exp=%b", it % 3, pred, exp); end
      rb = ~rb;
      @(posedge clk); #1;
      checks++;
      if (pred !== exp) begin failures++; $display("FAIL hold"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
