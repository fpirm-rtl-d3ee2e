// tb_global_rowbuffer -- loads the global rowbuffer from each of its three
// sources in turn and checks that it holds its value when nothing loads.
module tb_global_rowbuffer;
  import fpirm_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, ld_host = 0, ld_tile = 0, ld_rb = 0;
  logic [ROW_W-1:0] host_d, tile_d, rb_d, q, exp;

  global_rowbuffer dut (.clk(clk), .rst_n(rst_n), .ld_host(ld_host), .host_d(host_d),
    .ld_tile(ld_tile), .tile_d(tile_d), .ld_rb(ld_rb), .rb_d(rb_d), .q(q));
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
    for (int it = 0; it < 60; it++) begin
      for (int i = 0; i < ROW_W; i += 32) begin
        host_d[i +: 32] = $urandom; tile_d[i +: 32] = $urandom; rb_d[i +: 32] = $urandom;
      end
      ld_host = (it % 3 == 0); ld_tile = (it % 3 == 1); ld_rb = (it % 3 == 2);
      exp = ld_host ? host_d : ld_tile ? tile_d : rb_d;
      @(posedge clk); #1;
      ld_host = 0; ld_tile = 0; ld_rb = 0;
      checks++; if (q !== exp) begin failures++; $display("FAIL source %0d", it % 3); end
      host_d = ~host_d;
      @(posedge clk); #1;
      checks++; if (q !== exp) begin failures++; $display("FAIL hold"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
