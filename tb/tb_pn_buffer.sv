// tb_pn_buffer -- writes random words to a 16 x 40 buffer, reads them back in
// random order, checks the one-cycle read latency, that rdata holds while re
// is low and that simultaneous write and read of different words work.
module tb_pn_buffer;
  int checks = 0, failures = 0;
  logic clk = 0;
  logic we, re;
  logic [3:0] waddr, raddr;
  logic [39:0] wdata, rdata;
  logic [39:0] model [16];

  pn_buffer #(.DEPTH(16), .WIDTH(40)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(logic [39:0] exp_v, string what);
    checks++;
    if (rdata !== exp_v) begin
      failures++;
      if (failures < 10) $display("FAIL %s got=%h exp=%h", what, rdata, exp_v);
    end
  endtask

  initial begin
    we = 0; re = 0; waddr = 0; raddr = 0; wdata = 0;
    for (int i = 0; i < 16; i++) begin
      @(negedge clk);
      we = 1; waddr = 4'(i); wdata = {8'($urandom()), 32'($urandom())};
      model[i] = wdata;
    end
    @(negedge clk); we = 0;
    for (int k = 0; k < 200; k++) begin
      int a, b;
      a = $urandom_range(0, 15);
      b = (a + $urandom_range(1, 15)) % 16;
      @(negedge clk);
      re = 1; raddr = 4'(a);
      we = 1; waddr = 4'(b); wdata = {8'($urandom()), 32'($urandom())};
      @(negedge clk);
      model[b] = wdata;
      re = 0; we = 0;
      raddr = 4'(b);   // must not be read while re is low
      chk(model[a], "read");
      @(negedge clk);
      chk(model[a], "hold");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
