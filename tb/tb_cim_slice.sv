// tb_cim_slice -- random check of one CIM slice.
// Drives random TR levels, AP bit, neighbour bits and carries and checks the
// output for every source select, and the carry / super-carry outputs,
// against a reference computed from the level directly.
module tb_cim_slice;
  import fpirm_pkg::*;
  int checks = 0, failures = 0;
  logic [CNT_W-1:0] level;
  logic ap_bit, n_p1, n_m1, n_p8, n_m8, c_in, cp_in;
  logic rd_bit, c_out, cp_out, out, exp;
  cim_src_e src;

  cim_slice dut (.level(level), .ap_bit(ap_bit), .src(src), .n_p1(n_p1),
    .n_m1(n_m1), .n_p8(n_p8), .n_m8(n_m8), .c_in(c_in), .cp_in(cp_in),
    .rd_bit(rd_bit), .c_out(c_out), .cp_out(cp_out), .out(out));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 2000; it++) begin
      level = CNT_W'($urandom_range(0, TRD));
      {ap_bit, n_p1, n_m1, n_p8, n_m8, c_in, cp_in} = 7'($urandom);
      src = cim_src_e'($urandom_range(0, 9));
      #1;
      case (src)
        SRC_BYPASS: exp = ap_bit;
        SRC_OR:     exp = (level != 0);
        SRC_AND:    exp = (level == CNT_W'(TRD));
        SRC_SUM:    exp = level[0];
        SRC_C:      exp = c_in;
        SRC_CP:     exp = cp_in;
        SRC_NP1:    exp = n_p1;
        SRC_NM1:    exp = n_m1;
        SRC_NP8:    exp = n_p8;
        default:    exp = n_m8;
      endcase
      checks++;
      if (out !== exp || c_out !== level[1] || cp_out !== level[2] || rd_bit !== ap_bit) begin
        failures++;
        if (failures < 10)
          $display("FAIL src=%s level=%0d out=%b exp=%b", src.name(), level, out, exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
