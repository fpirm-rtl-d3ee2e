// tb_local_rowbuffer -- loads random rows, then clears them either entirely
// or only in the 64-bit words whose predication bit is set, comparing with
// the expected row built here.
module tb_local_rowbuffer;
  import fpirm_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, load = 0, clear = 0, clear_pred_en = 0;
  logic [ROW_W-1:0] d = '0, q, exp;
  logic [N_LANES-1:0] pred = '0;

  local_rowbuffer dut (.clk(clk), .rst_n(rst_n), .load(load), .d(d), .clear(clear),
    .clear_pred_en(clear_pred_en), .pred(pred), .q(q));
  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    #1; checks++; if (q !== '0) failures++;
    for (int it = 0; it < 50; it++) begin
      for (int i = 0; i < ROW_W; i += 32) d[i +: 32] = $urandom;
      load = 1; @(posedge clk); #1; load = 0;
      checks++; if (q !== d) begin failures++; $display("FAIL load"); end
      pred = N_LANES'($urandom);
      clear_pred_en = it[0];
      exp = d;
      for (int k = 0; k < N_LANES; k++)
        if (!clear_pred_en || pred[k]) exp[k*64 +: 64] = '0;
      clear = 1; @(posedge clk); #1; clear = 0;
      checks++;
      if (q !== exp) begin failures++; $display("FAIL clear pred_en=%0d pred=%b", clear_pred_en, pred); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
