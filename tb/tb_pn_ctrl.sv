// tb_pn_ctrl -- checks the controller's sequencing with ROWS=4, TILES=4,
// LAT=7: for each command, the weight-buffer addresses tile*ROWS+k in
// consecutive cycles, the bias read in the first LOAD cycle, the array row
// writes one cycle after each read, the LOAD length (ROWS+1 cycles),
// act_ready only while streaming, exactly cmd_count accepted vectors with
// random host pauses, done exactly LAT cycles after the last vector, and the
// zero-count command.
module tb_pn_ctrl;
  localparam int R = 4, T = 4, LAT = 7;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic cmd_valid, cmd_ready, wb_re, bb_re, wl_en, bias_load, act_valid, act_ready, arr_in_valid, busy, done;
  logic [1:0] cmd_tile, bb_raddr, wl_row;
  logic [15:0] cmd_count;
  logic [3:0] wb_raddr;

  pn_ctrl #(.ROWS(R), .TILES(T), .LAT(LAT), .CNT_W(16)) dut (.*);

  always #5 clk = ~clk;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_cmd(int tile, int count);
    int accepted = 0, since_last = 0;
    @(negedge clk);
    chk(cmd_ready && !busy, "idle before command");
    cmd_valid = 1; cmd_tile = 2'(tile); cmd_count = 16'(count);
    @(negedge clk);
    cmd_valid = 0;
    // LOAD: ROWS reads, then the last write.
    for (int k = 0; k <= R; k++) begin
      chk(!act_ready && busy && !cmd_ready, "load state");
      chk(wb_re == (k < R), "wb_re");
      if (k < R) chk(int'(wb_raddr) == tile * R + k, "wb_raddr");
      chk(bb_re == (k == 0), "bb_re");
      if (k == 0) chk(int'(bb_raddr) == tile, "bb_raddr");
      chk(wl_en == (k > 0), "wl_en");
      if (k > 0) chk(int'(wl_row) == k - 1, "wl_row");
      chk(bias_load == (k == 1), "bias_load");
      @(negedge clk);
    end
    // STREAM with random pauses.
    while (accepted < count) begin
      chk(act_ready, "act_ready while streaming");
      act_valid = ($urandom_range(0, 2) != 0);
      #1;
      chk(arr_in_valid == act_valid, "arr_in_valid");
      if (act_valid) accepted++;
      @(negedge clk);
      act_valid = 0;
    end
    // DRAIN: done exactly LAT cycles after the last accepted vector.
    since_last = 1;
    while (!done && since_last < 3 * LAT) begin
      chk(!act_ready && !cmd_ready, "drain state");
      @(negedge clk);
      since_last++;
    end
    chk(since_last == LAT, $sformatf("done delay %0d", since_last));
    @(negedge clk);
    chk(cmd_ready && !done, "idle after done");
  endtask

  initial begin
    cmd_valid = 0; cmd_tile = 0; cmd_count = 0; act_valid = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    run_cmd(2, 5);
    run_cmd(0, 1);
    run_cmd(3, 12);
    // Zero-count command: LOAD then straight to DRAIN.
    @(negedge clk);
    cmd_valid = 1; cmd_tile = 1; cmd_count = 0;
    @(negedge clk);
    cmd_valid = 0;
    repeat (R + 1) @(negedge clk);
    begin
      int n = 1;
      while (!done && n < 3 * LAT) begin @(negedge clk); n++; end
      chk(n == LAT && !act_ready, "zero-count command");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
