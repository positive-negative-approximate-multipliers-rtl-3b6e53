// tb_pn_pe -- checks the processing element: weight/mode capture on w_load
// only, one-cycle activation forwarding, and psum_out = psum_in + product one
// cycle later, for random operands in every mode. The product is computed
// from the error expressions of the multiplier.
module tb_pn_pe;
  import pn_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic w_load;
  pn_wentry_t w_in;
  logic [7:0]  a_in, a_out;
  logic [31:0] psum_in, psum_out;

  pn_pe #(.ACC_W(32)) dut (.*);

  always #5 clk = ~clk;

  function automatic longint approx(int av, int wv, int z, int ne);
    int r;
    r = av % (1 << z);
    if (z == 0) return av * wv;
    if (ne == 0) return av * wv - wv * r;
    return av * wv + wv * ((1 << z) - 1 - r);
  endfunction

  task automatic chk(longint got, longint exp_v, string what);
    checks++;
    if (got != exp_v) begin
      failures++;
      if (failures < 10) $display("FAIL %s got=%0d exp=%0d", what, got, exp_v);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int wv, z, ne;
    w_load = 0; w_in = '0; a_in = 0; psum_in = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 4000; it++) begin
      int av;
      longint ps;
      if (it % 50 == 0) begin
        wv = $urandom_range(0, 255);
        z  = $urandom_range(0, 3);
        ne = $urandom_range(0, 1);
        @(negedge clk);
        w_load = 1; w_in.w = 8'(wv); w_in.mode.z = 2'(z); w_in.mode.ne = ne[0];
        @(negedge clk);
        w_load = 0;
        w_in = pn_wentry_t'($urandom());   // must be ignored without w_load
      end
      av = $urandom_range(0, 255);
      ps = longint'($urandom());
      @(negedge clk);
      a_in = 8'(av); psum_in = 32'(ps);
      @(negedge clk);
      chk(longint'(a_out), longint'(av), "a_out");
      chk(longint'(psum_out), (ps + approx(av, wv, z, ne)) & 64'hFFFF_FFFF, "psum_out");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
