// tb_tr_sense_amp -- checks the threshold bits of the sense amplifier for
// every TR level and the plain-read pass-through bit.
module tb_tr_sense_amp;
  import fpirm_pkg::*;
  int checks = 0, failures = 0;
  logic [CNT_W-1:0] level;
  logic ap_bit, rd_bit;
  logic [TRD-1:0] ones, exp_ones;

  tr_sense_amp dut (.level(level), .ap_bit(ap_bit), .ones(ones), .rd_bit(rd_bit));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n <= int'(TRD); n++) begin
      for (int b = 0; b < 2; b++) begin
        level = CNT_W'(n); ap_bit = b[0];
        #1;
        // thermometer code: n ones from the bottom
        exp_ones = TRD'((1 << n) - 1);
        checks++;
        if (ones != exp_ones || rd_bit != b[0]) begin
          failures++;
          $display("FAIL level=%0d ones=%b exp=%b", n, ones, exp_ones);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
