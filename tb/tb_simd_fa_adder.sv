// tb_simd_fa_adder: self-checking test of the SIMD full-adder chain.
// Exhaustive over all operand pairs for add and subtract in each of the three
// precisions; the expected W+1-bit lane results and the saturated W-bit
// results are computed with integer arithmetic on the unpacked lanes.
module tb_simd_fa_adder;
  import lspine_pkg::*;

  logic [7:0]  a, b, sum_sat;
  logic [11:0] sum_ext;
  prec_e       pc;
  logic        sub;
  int checks = 0, failures = 0;

  simd_fa_adder dut (.a, .b, .pc, .sub, .sum_ext, .sum_sat);

  function automatic int sx(int v, int w);  // sign-extend a w-bit field
    return (v >= (1 << (w - 1))) ? v - (1 << w) : v;
  endfunction

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int p = 0; p < 3; p++) begin
      for (int s = 0; s < 2; s++) begin
        for (int ia = 0; ia < 256; ia++) begin
          for (int ib = 0; ib < 256; ib++) begin
            int w, nl, err;
            pc = prec_e'(p); sub = s[0]; a = 8'(ia); b = 8'(ib);
            #1;
            w  = 2 << p;
            nl = 8 / w;
            err = 0;
            for (int l = 0; l < nl; l++) begin
              int av, bv, r, sat, ext;
              av  = sx((ia >> (l * w)) & ((1 << w) - 1), w);
              bv  = sx((ib >> (l * w)) & ((1 << w) - 1), w);
              r   = s ? av - bv : av + bv;
              sat = (r > (1 << (w - 1)) - 1) ? (1 << (w - 1)) - 1 :
                    (r < -(1 << (w - 1))) ? -(1 << (w - 1)) : r;
              ext = int'(sum_ext >> (l * (w + 1))) & ((1 << (w + 1)) - 1);
              if (sx(ext, w + 1) != r) err++;
              if (sx(int'(sum_sat >> (l * w)) & ((1 << w) - 1), w) != sat) err++;
            end
            checks++;
            if (err != 0) begin
              failures++;
              if (failures < 10)
                $display("MISMATCH pc=%0d sub=%0d a=%h b=%h ext=%h sat=%h", p, s, a, b, sum_ext, sum_sat);
            end
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
