// tb_rm_tile -- random writes and reads to a full-size plain tile
// (16 DBCs x 32 rows x 512 bits), checked against a reference copy.  Each
// request's latency is checked against |shift distance| + 1 cycles, the
// distance being computed here from where each DBC was left.
module tb_rm_tile;
  import fpirm_pkg::*;
  localparam int W = ROW_W, D = D_DOM, NDBC = N_DBC;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic req_valid = 0, req_we = 0, ready, done;
  logic [3:0] req_dbc = '0;
  logic [ROW_AW-1:0] req_row = '0;
  logic [W-1:0] wdata = '0, rdata;
  logic [W-1:0] ref_mem [NDBC][D];
  bit written [NDBC][D];
  int where [NDBC];

  rm_tile dut (.clk(clk), .rst_n(rst_n), .req_valid(req_valid), .req_we(req_we),
    .req_dbc(req_dbc), .req_row(req_row), .wdata(wdata), .ready(ready), .done(done), .rdata(rdata));
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic access(bit we, int b, int r, logic [W-1:0] v);
    int cyc = 0, exp_lat;
    exp_lat = (r > where[b] ? r - where[b] : where[b] - r) + 1;
    req_valid <= 1; req_we <= we; req_dbc <= 4'(b); req_row <= ROW_AW'(r); wdata <= v;
    @(posedge clk);
    req_valid <= 0;
    do begin @(posedge clk); #1; cyc++; end while (!done);
    where[b] = r;
    checks++;
    if (cyc != exp_lat) begin failures++; $display("FAIL latency %0d exp %0d", cyc, exp_lat); end
    if (!we) begin
      checks++;
      if (rdata !== ref_mem[b][r]) begin failures++; $display("FAIL read dbc %0d row %0d", b, r); end
    end
  endtask

  initial begin
    for (int b = 0; b < NDBC; b++) where[b] = 0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int it = 0; it < 400; it++) begin
      int b, r;
      logic [W-1:0] v;
      b = $urandom_range(0, NDBC - 1); r = $urandom_range(0, D - 1);
      for (int i = 0; i < W; i += 32) v[i +: 32] = $urandom;
      if (!written[b][r] || $urandom_range(0, 1) == 0) begin
        ref_mem[b][r] = v; written[b][r] = 1;
        access(1, b, r, v);
      end else begin
        access(0, b, r, '0);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
