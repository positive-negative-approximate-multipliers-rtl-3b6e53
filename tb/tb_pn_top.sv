// tb_pn_top -- end-to-end test of the accelerator core at a reduced size.
//
// The testbench plays the host: it fills the weight buffer with random
// weights, each in a random one of the seven modes (ZE, PE z=1..3,
// NE z=1..3), fills the bias buffer, then runs a series of commands on
// different tiles with random pauses in the activation stream. Every result
// vector is compared with B + sum W*A, where each product is computed from
// the multiplier's error expressions (PE: W*A - W*r, NE: W*A + W*(2^z-1-r),
// r = A mod 2^z), and must appear exactly ROWS+COLS cycles after its vector
// was accepted; done must coincide with the last result. The test counts how
// often each mechanism occurred (each mode, stream pauses, tile switches,
// a tile rewritten between commands, a zero-count command) and counts a
// failure for any that never occurred.
module tb_pn_top;
  import pn_pkg::*;
  localparam int R = 8, C = 5, T = 3, NCMD = 8;
  localparam int LAT = R + C;
  localparam int WB_AW = $clog2(R * T), TILE_AW = (T > 1) ? $clog2(T) : 1;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic wb_we, bb_we, cmd_valid, cmd_ready, act_valid, act_ready, res_valid, busy, done;
  logic [WB_AW-1:0] wb_addr;
  pn_wentry_t [C-1:0] wb_wdata;
  logic [TILE_AW-1:0] bb_addr, cmd_tile;
  logic [C-1:0][31:0] bb_wdata, res_data;
  logic [15:0] cmd_count;
  logic [R-1:0][7:0] act_data;

  pn_top #(.ROWS(R), .COLS(C), .TILES(T)) dut (.*);

  always #5 clk = ~clk;

  pn_wentry_t wt [T][R][C];
  longint bias_m [T][C];
  typedef struct { longint res [C]; longint t_in; } exp_t;
  exp_t q [$];
  longint cyc = 0;
  int n_res = 0;
  int mode_seen [7];
  int n_pause = 0, n_switch = 0, n_rewrite = 0, n_zero = 0;
  longint last_res_cyc = -1;

  always @(posedge clk) cyc <= cyc + 1;

  function automatic longint approx(int av, int wv, int z, int ne);
    int r;
    r = av % (1 << z);
    if (z == 0) return av * wv;
    if (ne == 0) return av * wv - wv * r;
    return av * wv + wv * ((1 << z) - 1 - r);
  endfunction

  function automatic int mode_idx(pn_wentry_t e);
    if (e.mode.z == 0) return 0;
    return int'(e.mode.z) + (e.mode.ne ? 3 : 0);
  endfunction

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at cycle %0d", what, cyc);
    end
  endtask

  // Result monitor.
  always @(negedge clk) if (rst_n && res_valid) begin
    exp_t e;
    chk(q.size() > 0, "unexpected result");
    if (q.size() > 0) begin
      e = q.pop_front();
      n_res++;
      chk(cyc - e.t_in == LAT, $sformatf("latency %0d", cyc - e.t_in));
      for (int c = 0; c < C; c++)
        chk(longint'(res_data[c]) == (e.res[c] & 64'hFFFF_FFFF),
            $sformatf("result col %0d got %0d exp %0d", c, res_data[c], e.res[c]));
      last_res_cyc = cyc;
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write_tile(int t);
    for (int r = 0; r < R; r++) begin
      @(negedge clk);
      wb_we = 1; wb_addr = WB_AW'(t * R + r);
      for (int c = 0; c < C; c++) begin
        wt[t][r][c].w = 8'($urandom());
        wt[t][r][c].mode.z = 2'($urandom_range(0, 3));
        wt[t][r][c].mode.ne = 1'($urandom());
        wb_wdata[c] = wt[t][r][c];
      end
    end
    @(negedge clk);
    wb_we = 0;
    bb_we = 1; bb_addr = TILE_AW'(t);
    for (int c = 0; c < C; c++) begin
      bias_m[t][c] = longint'($urandom());
      bb_wdata[c] = 32'(bias_m[t][c]);
    end
    @(negedge clk);
    bb_we = 0;
  endtask

  task automatic run_cmd(int t, int count);
    int accepted = 0;
    while (!cmd_ready) @(negedge clk);
    cmd_valid = 1; cmd_tile = TILE_AW'(t); cmd_count = 16'(count);
    @(negedge clk);
    cmd_valid = 0;
    if (count == 0) n_zero++;
    while (accepted < count) begin
      if ($urandom_range(0, 3) == 0) begin
        act_valid = 0;
        if (act_ready) n_pause++;
      end else act_valid = 1;
      for (int r = 0; r < R; r++) act_data[r] = 8'($urandom());
      #1;
      if (act_valid && act_ready) begin
        exp_t e;
        for (int c = 0; c < C; c++) begin
          e.res[c] = bias_m[t][c];
          for (int r = 0; r < R; r++) begin
            e.res[c] += approx(int'(act_data[r]), int'(wt[t][r][c].w),
                               int'(wt[t][r][c].mode.z), int'(wt[t][r][c].mode.ne));
            mode_seen[mode_idx(wt[t][r][c])]++;
          end
        end
        e.t_in = cyc;
        q.push_back(e);
        accepted++;
      end
      @(negedge clk);
    end
    act_valid = 0;
    while (!done) @(negedge clk);
    #1;
    chk(count == 0 || last_res_cyc == cyc, "done with last result");
    @(negedge clk);
  endtask

  initial begin
    int prev_tile = -1;
    wb_we = 0; bb_we = 0; cmd_valid = 0; act_valid = 0; wb_addr = '0; wb_wdata = '0;
    bb_addr = '0; bb_wdata = '0; cmd_tile = '0; cmd_count = '0; act_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < T; t++) write_tile(t);
    for (int k = 0; k < NCMD; k++) begin
      int t;
      t = k % T;
      if (k == 4) begin write_tile(t); n_rewrite++; end
      if (prev_tile >= 0 && t != prev_tile) n_switch++;
      run_cmd(t, (k == 5) ? 0 : $urandom_range(1, 20));
      prev_tile = t;
    end
    repeat (LAT + 5) @(negedge clk);
    chk(q.size() == 0, "results missing");
    for (int m = 0; m < 7; m++) chk(mode_seen[m] > 0, $sformatf("mode %0d never used", m));
    chk(n_pause > 0, "no stream pause");
    chk(n_switch > 0, "no tile switch");
    chk(n_rewrite > 0, "no tile rewrite");
    chk(n_zero > 0, "no zero-count command");
    $display("mechanisms: modes ZE=%0d PE1=%0d PE2=%0d PE3=%0d NE1=%0d NE2=%0d NE3=%0d pauses=%0d switches=%0d rewrites=%0d zero_cmds=%0d results=%0d",
             mode_seen[0], mode_seen[1], mode_seen[2], mode_seen[3], mode_seen[4], mode_seen[5],
             mode_seen[6], n_pause, n_switch, n_rewrite, n_zero, n_res);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
