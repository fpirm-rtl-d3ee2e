// tb_cim_unit -- row-wide check of the CIM unit at full width (512).
// For random TR levels and AP bits, with the same source on every slice and
// lane isolation on and off, the whole output row is compared with a
// reference row computed here: bulk OR/AND/SUM, carry moved up by one, super
// carry moved up by two, plain read shifted by +-1 and +-8, zero filled at
// the row edge and (with isolation) at every 64-bit word edge.
module tb_cim_unit;
  import fpirm_pkg::*;
  localparam int W = ROW_W;
  int checks = 0, failures = 0;
  logic [CNT_W-1:0] level [W];
  logic [W-1:0] ap_bits, out, exp;
  cim_src_e src [W];
  logic lane_iso;

  cim_unit dut (.level(level), .ap_bits(ap_bits), .src(src), .lane_iso(lane_iso), .out(out));

  function automatic logic nb(input logic [W-1:0] v, input int i, input int d, input logic iso);
    int j = i + d;
    if (j < 0 || j >= W) return 1'b0;
    if (iso && (j / 64) != (i / 64)) return 1'b0;
    return v[j];
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] c_row, cp_row, s_row;
    for (int it = 0; it < 6; it++) begin
      for (int i = 0; i < W; i++) level[i] = CNT_W'($urandom_range(0, TRD));
      for (int i = 0; i < W; i += 32) ap_bits[i +: 32] = $urandom;
      for (int i = 0; i < W; i++) begin
        c_row[i] = level[i][1]; cp_row[i] = level[i][2]; s_row[i] = level[i][0];
      end
      for (int s = 0; s <= 9; s++) begin
        for (int iso = 0; iso < 2; iso++) begin
          lane_iso = iso[0];
          for (int i = 0; i < W; i++) src[i] = cim_src_e'(s);
          #1;
          for (int i = 0; i < W; i++) begin
            case (cim_src_e'(s))
              SRC_BYPASS: exp[i] = ap_bits[i];
              SRC_OR:     exp[i] = (level[i] != 0);
              SRC_AND:    exp[i] = (level[i] == CNT_W'(TRD));
              SRC_SUM:    exp[i] = s_row[i];
              SRC_C:      exp[i] = nb(c_row, i, -1, lane_iso);
              SRC_CP:     exp[i] = nb(cp_row, i, -2, lane_iso);
              SRC_NP1:    exp[i] = nb(ap_bits, i, 1, lane_iso);
              SRC_NM1:    exp[i] = nb(ap_bits, i, -1, lane_iso);
              SRC_NP8:    exp[i] = nb(ap_bits, i, 8, lane_iso);
              default:    exp[i] = nb(ap_bits, i, -8, lane_iso);
            endcase
          end
          checks++;
          if (out !== exp) begin
            failures++;
            $display("FAIL src=%0d iso=%0d diff=%h", s, iso, out ^ exp);
          end
        end
      end
      // per-slice selects: the Add pattern SUM / C / C' on bits 5,6,7 of each word
      lane_iso = 1'b1;
      for (int i = 0; i < W; i++)
        src[i] = (i % 64 == 5) ? SRC_SUM : (i % 64 == 6) ? SRC_C : (i % 64 == 7) ? SRC_CP : SRC_BYPASS;
      #1;
      for (int i = 0; i < W; i++)
        exp[i] = (i % 64 == 5) ? s_row[i] : (i % 64 == 6) ? c_row[i-1] :
                 (i % 64 == 7) ? cp_row[i-2] : ap_bits[i];
      checks++;
      if (out !== exp) begin
        failures++;
        $display("FAIL mixed selects diff=%h", out ^ exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
