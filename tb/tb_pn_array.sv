// tb_pn_array -- 4 x 3 array: loads random weights in random modes row by
// row, holds random biases, streams 60 random activation vectors with random
// bubbles and checks every result vector against B + sum W*A (products taken
// from the multiplier's error expressions), their order, and that each
// appears exactly ROWS+COLS cycles after its input. A second weight set is
// then loaded and the check repeated.
module tb_pn_array;
  import pn_pkg::*;
  localparam int R = 4, C = 3, LAT = R + C;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic wl_en;
  logic [1:0] wl_row;
  pn_wentry_t [C-1:0] wl_data;
  logic [C-1:0][31:0] bias;
  logic in_valid, out_valid;
  logic [R-1:0][7:0] in_act;
  logic [C-1:0][31:0] out_res;

  pn_array #(.ROWS(R), .COLS(C), .ACC_W(32)) dut (.*);

  always #5 clk = ~clk;

  pn_wentry_t wt [R][C];
  typedef struct { longint res [C]; int t_in; } exp_t;
  exp_t q [$];
  int cyc = 0;
  int n_out = 0;

  function automatic longint approx(int av, int wv, int z, int ne);
    int r;
    r = av % (1 << z);
    if (z == 0) return av * wv;
    if (ne == 0) return av * wv - wv * r;
    return av * wv + wv * ((1 << z) - 1 - r);
  endfunction

  always @(posedge clk) cyc <= cyc + 1;

  // Output monitor.
  always @(negedge clk) if (rst_n && out_valid) begin
    exp_t e;
    checks++;
    if (q.size() == 0) begin
      failures++;
      $display("FAIL unexpected output");
    end else begin
      e = q.pop_front();
      n_out++;
      checks++;
      if (cyc - e.t_in != LAT) begin
        failures++;
        $display("FAIL latency %0d", cyc - e.t_in);
      end
      for (int c = 0; c < C; c++) begin
        checks++;
        if (longint'(out_res[c]) != (e.res[c] & 64'hFFFF_FFFF)) begin
          failures++;
          if (failures < 10) $display("FAIL col %0d got=%0d exp=%0d", c, out_res[c], e.res[c]);
        end
      end
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load_weights();
    for (int r = 0; r < R; r++) begin
      @(negedge clk);
      wl_en = 1; wl_row = 2'(r);
      for (int c = 0; c < C; c++) begin
        wt[r][c].w = 8'($urandom());
        wt[r][c].mode.z = 2'($urandom_range(0, 3));
        wt[r][c].mode.ne = 1'($urandom());
        wl_data[c] = wt[r][c];
      end
    end
    @(negedge clk);
    wl_en = 0;
    for (int c = 0; c < C; c++) bias[c] = $urandom_range(0, 100000);
  endtask

  task automatic stream(int n);
    int sent = 0;
    while (sent < n) begin
      @(negedge clk);
      if ($urandom_range(0, 3) == 0) begin
        in_valid = 0;
        for (int r = 0; r < R; r++) in_act[r] = 8'($urandom());  // bubble data is ignored
      end else begin
        exp_t e;
        in_valid = 1;
        for (int r = 0; r < R; r++) in_act[r] = 8'($urandom());
        for (int c = 0; c < C; c++) begin
          e.res[c] = longint'(bias[c]);
          for (int r = 0; r < R; r++)
            e.res[c] += approx(int'(in_act[r]), int'(wt[r][c].w), int'(wt[r][c].mode.z), int'(wt[r][c].mode.ne));
        end
        e.t_in = cyc;
        q.push_back(e);
        sent++;
      end
    end
    @(negedge clk);
    in_valid = 0;
    repeat (LAT + 2) @(negedge clk);
  endtask

  initial begin
    wl_en = 0; wl_row = 0; wl_data = '0; bias = '0; in_valid = 0; in_act = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    load_weights();
    stream(60);
    load_weights();
    stream(60);
    checks++;
    if (n_out != 120 || q.size() != 0) begin
      failures++;
      $display("FAIL got %0d outputs, %0d missing", n_out, q.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
