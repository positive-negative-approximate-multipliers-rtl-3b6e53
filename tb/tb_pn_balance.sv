// tb_pn_balance -- convolution-error workload: filter-oriented error
// balancing on a 64-input, 16-filter layer slice.
//
// Weights are drawn from a narrow bell-shaped distribution (sum of four
// uniform values, 96..160) and activations uniformly from 0..255. Three weight
// tiles hold the same weights with three different mode assignments:
//   tile 0  all weights PE with z = 3 (no balancing)
//   tile 1  balancing per filter: of the occurrences of each weight value,
//           half go to PE and half to NE with z = 3; an odd leftover is kept
//           exact (ZE) and put on the filter's residue list
//   tile 2  as tile 1, plus the residue list split into two sets of nearly
//           equal sum by the largest differencing method (Karmarkar-Karp),
//           one set PE and the other NE, with z = 1
// For NVEC random activation vectors per tile the testbench compares every
// result with the exact convolution and with the expected approximate value,
// and checks per filter that the measured mean error matches
// E = sum s*(2^z-1)/2*W and that its spread matches
// Var = sum W^2*(4^z-1)/12, within statistical tolerance. Finally it checks
// that the balanced tiles' mean error is far smaller than the unbalanced one.
module tb_pn_balance;
  import pn_pkg::*;
  localparam int R = 64, C = 16, T = 3, NVEC = 300;
  localparam int LAT = R + C;
  localparam int WB_AW = $clog2(R * T), TILE_AW = 2;
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

  localparam longint BIAS = 1000;
  int         w [R][C];
  pn_mode_t   md [T][R][C];
  typedef struct { longint ex [C]; longint ap [C]; } exp_t;
  exp_t       q [$];
  real        err_sum [T][C], err_sq [T][C];
  int         cur_tile;
  int         n_res [T];

  function automatic longint approx(int av, int wv, pn_mode_t m);
    int r, z;
    z = int'(m.z);
    r = av % (1 << z);
    if (z == 0) return av * wv;
    if (!m.ne) return av * wv - wv * r;
    return av * wv + wv * ((1 << z) - 1 - r);
  endfunction

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  // Result monitor: accumulate the convolution error per filter.
  always @(negedge clk) if (rst_n && res_valid) begin
    exp_t e0;
    e0 = q.pop_front();
    for (int c = 0; c < C; c++) begin
      real e;
      chk(longint'(res_data[c]) == e0.ap[c], $sformatf("tile %0d col %0d result %0d exp %0d", cur_tile, c, res_data[c], e0.ap[c]));
      e = real'(e0.ex[c] - longint'(res_data[c]));
      err_sum[cur_tile][c] += e;
      err_sq[cur_tile][c]  += e * e;
    end
    n_res[cur_tile]++;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Step-1 style balancing of one filter (column c), z = 3.
  task automatic balance_filter(int c, ref int residue [$]);
    int cnt [256];
    int seen [256];
    for (int v = 0; v < 256; v++) begin cnt[v] = 0; seen[v] = 0; end
    for (int r = 0; r < R; r++) cnt[w[r][c]]++;
    residue.delete();
    for (int r = 0; r < R; r++) begin
      int v, k;
      v = w[r][c];
      k = seen[v]++;
      if (k < cnt[v] / 2)            md[1][r][c] = pn_mode(1'b0, 2'd3);
      else if (k < 2 * (cnt[v] / 2)) md[1][r][c] = pn_mode(1'b1, 2'd3);
      else begin
        md[1][r][c] = MODE_ZE;
        residue.push_back(r);
      end
    end
  endtask

  // Largest differencing method over the residue rows of filter c: PE for one
  // side, NE for the other, z = 1.
  task automatic ldm_filter(int c, int residue [$]);
    int n, grp [$], sgn [$], val [$];
    bit alive [$];
    n = residue.size();
    for (int i = 0; i < n; i++) begin
      grp.push_back(i); sgn.push_back(1); val.push_back(w[residue[i]][c]); alive.push_back(1);
    end
    forever begin
      int g1 = -1, g2 = -1;
      for (int i = 0; i < n; i++) if (alive[i]) begin
        if (g1 < 0 || val[i] > val[g1]) begin g2 = g1; g1 = i; end
        else if (g2 < 0 || val[i] > val[g2]) g2 = i;
      end
      if (g2 < 0) break;
      // g2's members join g1 on the opposite side.
      for (int i = 0; i < n; i++) if (grp[i] == g2) begin grp[i] = g1; sgn[i] = -sgn[i]; end
      val[g1] = val[g1] - val[g2];
      alive[g2] = 0;
    end
    for (int r = 0; r < R; r++) md[2][r][c] = md[1][r][c];
    for (int i = 0; i < n; i++) md[2][residue[i]][c] = pn_mode(sgn[i] < 0, 2'd1);
  endtask

  task automatic write_tile(int t);
    for (int r = 0; r < R; r++) begin
      @(negedge clk);
      wb_we = 1; wb_addr = WB_AW'(t * R + r);
      for (int c = 0; c < C; c++) begin
        wb_wdata[c].w = 8'(w[r][c]);
        wb_wdata[c].mode = md[t][r][c];
      end
    end
    @(negedge clk);
    wb_we = 0;
    bb_we = 1; bb_addr = TILE_AW'(t);
    for (int c = 0; c < C; c++) bb_wdata[c] = 32'(BIAS);
    @(negedge clk);
    bb_we = 0;
  endtask

  task automatic run_tile(int t);
    int sent = 0;
    cur_tile = t;
    while (!cmd_ready) @(negedge clk);
    cmd_valid = 1; cmd_tile = TILE_AW'(t); cmd_count = 16'(NVEC);
    @(negedge clk);
    cmd_valid = 0;
    act_valid = 1;
    while (sent < NVEC) begin
      for (int r = 0; r < R; r++) act_data[r] = 8'($urandom());
      #1;
      if (act_ready) begin
        exp_t e1;
        for (int c = 0; c < C; c++) begin
          e1.ex[c] = BIAS; e1.ap[c] = BIAS;
          for (int r = 0; r < R; r++) begin
            e1.ex[c] += longint'(act_data[r]) * w[r][c];
            e1.ap[c] += approx(int'(act_data[r]), w[r][c], md[t][r][c]);
          end
        end
        q.push_back(e1);
        sent++;
      end
      @(negedge clk);
    end
    act_valid = 0;
    while (!done) @(negedge clk);
    @(negedge clk);
  endtask

  initial begin
    real tot_abs [T];
    int n_ze1 = 0, n_res2 = 0;
    wb_we = 0; bb_we = 0; cmd_valid = 0; act_valid = 0; wb_addr = '0; wb_wdata = '0;
    bb_addr = '0; bb_wdata = '0; cmd_tile = '0; cmd_count = '0; act_data = '0;
    for (int t = 0; t < T; t++) begin
      n_res[t] = 0;
      for (int c = 0; c < C; c++) begin err_sum[t][c] = 0; err_sq[t][c] = 0; end
    end
    for (int r = 0; r < R; r++)
      for (int c = 0; c < C; c++) begin
        w[r][c] = 96 + $urandom_range(0, 16) + $urandom_range(0, 16) + $urandom_range(0, 16) + $urandom_range(0, 16);
        md[0][r][c] = pn_mode(1'b0, 2'd3);
      end
    for (int c = 0; c < C; c++) begin
      int residue [$];
      balance_filter(c, residue);
      ldm_filter(c, residue);
      n_res2 += residue.size();
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < T; t++) write_tile(t);
    for (int t = 0; t < T; t++) run_tile(t);

    for (int t = 0; t < T; t++) begin
      chk(n_res[t] == NVEC, $sformatf("tile %0d got %0d results", t, n_res[t]));
      tot_abs[t] = 0;
      for (int c = 0; c < C; c++) begin
        real e_exp, v_exp, mean, var_m, tol;
        e_exp = 0; v_exp = 0;
        for (int r = 0; r < R; r++) begin
          int z, s;
          z = int'(md[t][r][c].z);
          s = md[t][r][c].ne ? -1 : 1;
          if (z > 0) begin
            e_exp += s * ((2.0 ** z) - 1) / 2.0 * w[r][c];
            v_exp += ((4.0 ** z) - 1) / 12.0 * w[r][c] * w[r][c];
          end
          if (t == 1 && z == 0) n_ze1++;
        end
        mean  = err_sum[t][c] / NVEC;
        var_m = err_sq[t][c] / NVEC - mean * mean;
        tol   = 5.0 * $sqrt(v_exp / NVEC) + 1.0;
        chk(mean > e_exp - tol && mean < e_exp + tol,
            $sformatf("tile %0d col %0d mean error %f, expected %f", t, c, mean, e_exp));
        chk(var_m > 0.6 * v_exp && var_m < 1.4 * v_exp,
            $sformatf("tile %0d col %0d error variance %f, expected %f", t, c, var_m, v_exp));
        tot_abs[t] += (mean < 0) ? -mean : mean;
      end
      $display("tile %0d: mean |E[error]| per filter = %f", t, tot_abs[t] / C);
    end
    chk(tot_abs[1] < 0.05 * tot_abs[0], "balancing did not cancel the mean error");
    chk(tot_abs[2] < 0.05 * tot_abs[0], "residue partitioning did not keep the mean error low");
    chk(n_res2 > 0, "no residue weights");
    $display("residue weights (ZE after balancing): %0d of %0d", n_ze1, R * C);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
