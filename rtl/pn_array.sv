// pn_array -- ROWS x COLS weight-stationary systolic array of positive/
// negative approximate MAC units.
//
// PE (r, c) holds weight W[r][c] and its mode. Activation element r enters
// row r from the left (after an input skew of r cycles) and moves one PE to
// the right per cycle; partial sums move one PE down per cycle. The top of
// column c is fed with the column bias B[c], so the bottom of column c
// delivers G[c] = B[c] + sum_r W[r][c] * A[r], each product taken in its
// weight's mode. An output de-skew lines the columns up again and a final
// register presents the whole result vector together.
//
// Timing: a vector presented with in_valid in cycle t appears with out_valid
// in cycle t + ROWS + COLS (LATENCY). A new vector may enter every cycle;
// cycles without in_valid become bubbles that are discarded at the output.
// Weights are written one row per cycle through wl_en/wl_row/wl_data and must
// not change while vectors are in flight. The array and weight-stationary
// dataflow follow the paper's TPU-like setting; the size, the bias injection
// point and the skew logic are this design's choices.
module pn_array
  import pn_pkg::*;
#(
  parameter int unsigned ROWS  = 64,
  parameter int unsigned COLS  = 64,
  parameter int unsigned ACC_W = 32,
  localparam int unsigned ROW_AW  = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned LATENCY = ROWS + COLS
) (
  input  logic                             clk,
  input  logic                             rst_n,
  // weight loading
  input  logic                             wl_en,
  input  logic [ROW_AW-1:0]                wl_row,
  input  pn_wentry_t [COLS-1:0]            wl_data,
  // column biases, held constant during a command
  input  logic [COLS-1:0][ACC_W-1:0]       bias,
  // activation vectors
  input  logic                             in_valid,
  input  logic [ROWS-1:0][DATA_W-1:0]      in_act,
  // result vectors
  output logic                             out_valid,
  output logic [COLS-1:0][ACC_W-1:0]       out_res
);

  logic [ROWS-1:0][DATA_W-1:0] act_skewed;
  logic [DATA_W-1:0]           a_h  [ROWS][COLS+1];  // horizontal activation wires
  logic [ACC_W-1:0]            ps_v [ROWS+1][COLS];  // vertical partial-sum wires
  logic [COLS-1:0][ACC_W-1:0]  col_out;
  logic [COLS-1:0][ACC_W-1:0]  col_aligned;
  logic [LATENCY-1:0]          vpipe;

  pn_skew #(.LANES(ROWS), .W(DATA_W), .REVERSE(1'b0)) u_in_skew (
    .clk (clk), .rst_n (rst_n), .din (in_act), .dout (act_skewed)
  );

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    assign a_h[r][0] = act_skewed[r];
    for (genvar c = 0; c < COLS; c++) begin : g_col
      pn_pe #(.ACC_W(ACC_W)) u_pe (
        .clk      (clk),
        .rst_n    (rst_n),
        .w_load   (wl_en && (wl_row == ROW_AW'(r))),
        .w_in     (wl_data[c]),
        .a_in     (a_h[r][c]),
        .psum_in  (ps_v[r][c]),
        .a_out    (a_h[r][c+1]),
        .psum_out (ps_v[r+1][c])
      );
    end
  end

  for (genvar c = 0; c < COLS; c++) begin : g_io
    assign ps_v[0][c] = bias[c];
    assign col_out[c] = ps_v[ROWS][c];
  end

  pn_skew #(.LANES(COLS), .W(ACC_W), .REVERSE(1'b1)) u_out_deskew (
    .clk (clk), .rst_n (rst_n), .din (col_out), .dout (col_aligned)
  );

  // Validity travels alongside the wavefront; the result register adds the
  // last cycle of LATENCY.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vpipe   <= '0;
      out_res <= '0;
    end else begin
      vpipe   <= {vpipe[LATENCY-2:0], in_valid};
      out_res <= col_aligned;
    end
  end

  assign out_valid = vpipe[LATENCY-1];

  // A weight row address must exist.
  a_wl_row: assert property (@(posedge clk) disable iff (!rst_n)
                             wl_en |-> (32'(wl_row) < ROWS))
    else $error("pn_array: weight row %0d out of range", wl_row);

endmodule
