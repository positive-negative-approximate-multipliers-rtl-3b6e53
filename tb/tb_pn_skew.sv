// tb_pn_skew -- drives random data into a 5-lane skew and a 5-lane de-skew
// every cycle and checks that lane i of the output equals lane i of the input
// from exactly i (skew) or 4-i (de-skew) cycles earlier.
module tb_pn_skew;
  localparam int L = 5;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic [L-1:0][7:0] din, dout_s, dout_d;
  logic [L-1:0][7:0] hist [$];

  pn_skew #(.LANES(L), .W(8), .REVERSE(1'b0)) u_s (.clk(clk), .rst_n(rst_n), .din(din), .dout(dout_s));
  pn_skew #(.LANES(L), .W(8), .REVERSE(1'b1)) u_d (.clk(clk), .rst_n(rst_n), .din(din), .dout(dout_d));

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    din = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 500; t++) begin
      @(negedge clk);
      for (int i = 0; i < L; i++) din[i] = 8'($urandom());
      hist.push_front(din);   // hist[k] = input k cycles ago
      #1;
      if (t >= L) begin
        for (int i = 0; i < L; i++) begin
          checks += 2;
          if (dout_s[i] != hist[i][i]) begin
            failures++;
            if (failures < 10) $display("FAIL skew lane %0d t=%0d", i, t);
          end
          if (dout_d[i] != hist[L-1-i][i]) begin
            failures++;
            if (failures < 10) $display("FAIL deskew lane %0d t=%0d", i, t);
          end
        end
      end
      if (hist.size() > L) void'(hist.pop_back());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
