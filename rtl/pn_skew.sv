// pn_skew -- triangular delay lines that set up data for the systolic array.
//
// With REVERSE = 0, lane i is delayed by i cycles, so that an activation
// vector entering in one cycle reaches array row i in cycle t+i (input skew).
// With REVERSE = 1, lane i is delayed by LANES-1-i cycles, so that column
// results leaving the array one cycle apart are lined up again (output
// de-skew). A lane with no delay is a wire. No enable: data moves every
// cycle, and validity is tracked by the caller. Reset clears all stages.
// The systolic array is the paper's setting; this data setup is this
// design's own (conventional) choice.
module pn_skew #(
  parameter int unsigned LANES   = 64,
  parameter int unsigned W       = 8,
  parameter bit          REVERSE = 1'b0
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [LANES-1:0][W-1:0] din,
  output logic [LANES-1:0][W-1:0] dout
);

  for (genvar i = 0; i < LANES; i++) begin : g_lane
    localparam int unsigned D = REVERSE ? (LANES - 1 - i) : i;
    if (D == 0) begin : g_wire
      assign dout[i] = din[i];
    end else begin : g_delay
      logic [W-1:0] stage [D];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int unsigned k = 0; k < D; k++) stage[k] <= '0;
        end else begin
          stage[0] <= din[i];
          for (int unsigned k = 1; k < D; k++) stage[k] <= stage[k-1];
        end
      end
      assign dout[i] = stage[D-1];
    end
  end

endmodule
