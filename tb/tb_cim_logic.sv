// tb_cim_logic -- exhaustive check of the TR logic tree.
// For every count 0..7 of '1's among seven domains, builds the threshold bits
// ones[k] = count > k and checks OR, AND, SUM (count odd), C (bit 1 of the
// count) and C' (bit 2) against the count computed here.
module tb_cim_logic;
  int checks = 0, failures = 0;
  logic [6:0] ones;
  logic or_o, and_o, sum_o, c_o, cp_o;

  cim_logic dut (.ones(ones), .or_o(or_o), .and_o(and_o), .sum_o(sum_o),
                 .c_o(c_o), .cp_o(cp_o));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n <= 7; n++) begin
      for (int k = 0; k < 7; k++) ones[k] = (n > k);
      #1;
      checks++;
      if ({cp_o, c_o, sum_o} != 3'(n) || or_o != (n >= 1) || and_o != (n == 7)) begin
        failures++;
        $display("FAIL count=%0d got cp=%b c=%b s=%b or=%b and=%b", n, cp_o, c_o, sum_o, or_o, and_o);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
