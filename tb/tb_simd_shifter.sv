// tb_simd_shifter: self-checking test of the lane-segmented right shifter.
// Exhaustive over word values, precisions, shift amounts and the sticky
// control, with fs_en both high and low. The reference shifts each unpacked
// signed lane with integer arithmetic and ORs the dropped bits for sticky.
module tb_simd_shifter;
  import lspine_pkg::*;

  logic [7:0] x, y;
  prec_e      pc;
  logic [2:0] rs;
  logic       fs_en, sticky_ctrl;
  logic [3:0] sticky;
  int checks = 0, failures = 0;

  simd_shifter #(.STAGES(3)) dut (.x, .pc, .rs, .fs_en, .sticky_ctrl, .y, .sticky);

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int p = 0; p < 3; p++)
      for (int r = 0; r < 8; r++)
        for (int sc = 0; sc < 2; sc++)
          for (int fe = 0; fe < 2; fe++)
            for (int v = 0; v < 256; v++) begin
              int w, nl, amt;
              logic [7:0] ey;
              logic [3:0] es;
              pc = prec_e'(p); rs = 3'(r); sticky_ctrl = sc[0]; fs_en = fe[0]; x = 8'(v);
              #1;
              w = 2 << p; nl = 8 / w;
              amt = (r > w - 1) ? w - 1 : r;
              ey = '0; es = '0;
              for (int l = 0; l < nl; l++) begin
                int lv, q, dropped;
                lv = (v >> (l * w)) & ((1 << w) - 1);
                if (lv >= (1 << (w - 1))) lv -= (1 << w);
                q = lv >>> amt;
                dropped = ((v >> (l * w)) & ((1 << amt) - 1));
                es[l] = (dropped != 0);
                if (sc && es[l]) q = q | 1;
                ey = ey | 8'((q & ((1 << w) - 1)) << (l * w));
              end
              if (!fe) begin ey = x; es = '0; end
              checks++;
              if (y !== ey || sticky !== es) begin
                failures++;
                if (failures < 10)
                  $display("MISMATCH pc=%0d rs=%0d sc=%0d fs=%0d x=%h y=%h exp=%h st=%b exp=%b",
                           p, r, sc, fe, x, y, ey, sticky, es);
              end
            end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
