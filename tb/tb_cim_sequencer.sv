// tb_cim_sequencer -- checks the unrolling of Add(w, l) into w carry-chain
// steps at bits l .. l+w-1 with upper bound l+w, one per cycle when the
// datapath is ready (w cycles in total), its stalling under random
// back-pressure, and the one-to-one forwarding of every other command.
module tb_cim_sequencer;
  import fpirm_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic i_valid = 0, i_ready, o_valid, o_ready = 1;
  cmd_t i_cmd = '0;
  cmd_t o_cmd;
  int stall_pct = 0;

  cim_sequencer dut (.clk(clk), .rst_n(rst_n), .i_valid(i_valid), .i_ready(i_ready),
    .i_cmd(i_cmd), .o_valid(o_valid), .o_ready(o_ready), .o_cmd(o_cmd));
  always #5 clk = ~clk;

  // random back-pressure
  always @(posedge clk) o_ready <= ($urandom_range(0, 99) >= stall_pct);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // collect what leaves the sequencer
  cmd_t got [$];
  always @(posedge clk) if (rst_n && o_valid && o_ready) got.push_back(o_cmd);

  task automatic send(cmd_t c, output int cycles);
    bit acc;
    cycles = 0;
    @(negedge clk);
    i_cmd = c; i_valid = 1;
    do begin acc = i_ready; @(posedge clk); cycles++; @(negedge clk); end while (!acc);
    i_valid = 0;
    // wait until the expansion is over
    while (dut.in_add) begin @(posedge clk); cycles++; @(negedge clk); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int pass = 0; pass < 2; pass++) begin
      stall_pct = pass ? 30 : 0;
      for (int it = 0; it < 40; it++) begin
        cmd_t c;
        int cyc, w, l;
        c = '0;
        c.dbc = 4'($urandom);
        got.delete();
        if (it % 2 == 0) begin
          w = $urandom_range(1, 64); l = $urandom_range(0, 64 - w);
          c.op = OP_ADD; c.width = BIT_AW'(w); c.bitpos = BIT_AW'(l);
          send(c, cyc);
          @(posedge clk); #1;
          checks++;
          if (got.size() != w) begin failures++; $display("FAIL %0d steps for w=%0d", got.size(), w); end
          else for (int s = 0; s < w; s++)
            if (got[s].op != OP_ADD_STEP || int'(got[s].bitpos) != l + s ||
                int'(got[s].width) != l + w || got[s].dbc != c.dbc) begin
              failures++; $display("FAIL step %0d of Add(%0d,%0d)", s, w, l); break;
            end
          if (pass == 0) begin
            checks++;
            if (cyc != w) begin failures++; $display("FAIL Add w=%0d took %0d cycles", w, cyc); end
          end
        end else begin
          c.op = op_e'($urandom_range(1, 11)); c.data[31:0] = $urandom;
          send(c, cyc);
          @(posedge clk); #1;
          checks++;
          if (got.size() != 1 || got[0] != c) begin failures++; $display("FAIL forward"); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
