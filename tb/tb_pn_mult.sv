// tb_pn_mult -- exhaustive check of the approximate multiplier: all 256 x 256
// operand pairs in all seven modes (ZE, PE z=1..3, NE z=1..3). The expected
// product is built from the error expressions, independently of the bit
// manipulation in the design:
//   PE: W*A - W*r            NE: W*A + W*(2^z - 1 - r),   r = A mod 2^z.
// Also checks that the PE error is never negative and the NE error never
// positive, and that the mean error over all A is s*(2^z-1)/2*W.
module tb_pn_mult;
  import pn_pkg::*;
  int checks = 0, failures = 0;
  logic [7:0]  a, w;
  pn_mode_t    mode;
  logic [15:0] p;

  pn_mult dut (.a(a), .w(w), .mode(mode), .p(p));

  initial begin
    #100000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int m = 0; m < 7; m++) begin
      int z, ne;
      z  = (m == 0) ? 0 : ((m - 1) % 3) + 1;
      ne = (m >= 4) ? 1 : 0;
      for (int wv = 0; wv < 256; wv++) begin
        longint err_sum;
        err_sum = 0;
        for (int av = 0; av < 256; av++) begin
          int r, exact, expv, err;
          a = 8'(av); w = 8'(wv); mode.ne = ne[0]; mode.z = 2'(z);
          #1;
          r     = av % (1 << z);
          exact = av * wv;
          if (z == 0)      expv = exact;
          else if (ne == 0) expv = exact - wv * r;
          else              expv = exact + wv * ((1 << z) - 1 - r);
          err = exact - int'(p);
          err_sum += err;
          checks++;
          if (int'(p) != expv) begin
            failures++;
            if (failures < 10) $display("FAIL a=%0d w=%0d z=%0d ne=%0d got=%0d exp=%0d",
                                        av, wv, z, ne, p, expv);
          end
          if ((z > 0 && ne == 0 && err < 0) || (ne == 1 && err > 0)) begin
            failures++;
            if (failures < 10) $display("FAIL sign a=%0d w=%0d z=%0d ne=%0d err=%0d", av, wv, z, ne, err);
          end
        end
        // Mean error over all activations: s*(2^z-1)/2*W, i.e. sum = s*128*(2^z-1)*W.
        checks++;
        if (err_sum != (ne ? -1 : 1) * 128 * ((1 << z) - 1) * wv) begin
          failures++;
          if (failures < 10) $display("FAIL mean w=%0d z=%0d ne=%0d sum=%0d", wv, z, ne, err_sum);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
