// tb_pn_ppgen -- exhaustive check of the partial-product multiplexer for four
// shift positions: every weight, activation bit and (ze, ne) control. The
// expected value follows the mode table: exact (ze=1) gives W<<n when the
// activation bit is set, forced (ze=0, ne=1) always gives W<<n, perforated
// (ze=0, ne=0) always gives 0.
module tb_pn_ppgen;
  int checks = 0, failures = 0;
  logic [7:0]  w;
  logic        a_n, ze, ne;
  logic [15:0] pp0, pp1, pp2, pp5;

  pn_ppgen #(.DATA_W(8), .N(0)) u0 (.w(w), .a_n(a_n), .ze(ze), .ne(ne), .pp(pp0));
  pn_ppgen #(.DATA_W(8), .N(1)) u1 (.w(w), .a_n(a_n), .ze(ze), .ne(ne), .pp(pp1));
  pn_ppgen #(.DATA_W(8), .N(2)) u2 (.w(w), .a_n(a_n), .ze(ze), .ne(ne), .pp(pp2));
  pn_ppgen #(.DATA_W(8), .N(5)) u5 (.w(w), .a_n(a_n), .ze(ze), .ne(ne), .pp(pp5));

  function automatic int expect_pp(int wv, int an, int zev, int nev, int n);
    int on;
    if (zev == 1) on = an;
    else          on = nev;
    return on ? wv * (1 << n) : 0;
  endfunction

  task automatic chk(logic [15:0] got, int exp_v, string what);
    checks++;
    if (int'(got) != exp_v) begin
      failures++;
      if (failures < 10) $display("FAIL %s w=%0d a=%0d ze=%0d ne=%0d got=%0d exp=%0d",
                                  what, w, a_n, ze, ne, got, exp_v);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int wv = 0; wv < 256; wv++)
      for (int c = 0; c < 8; c++) begin
        w = 8'(wv); a_n = c[0]; ze = c[1]; ne = c[2];
        #1;
        chk(pp0, expect_pp(wv, c[0], c[1], c[2], 0), "n0");
        chk(pp1, expect_pp(wv, c[0], c[1], c[2], 1), "n1");
        chk(pp2, expect_pp(wv, c[0], c[1], c[2], 2), "n2");
        chk(pp5, expect_pp(wv, c[0], c[1], c[2], 5), "n5");
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
