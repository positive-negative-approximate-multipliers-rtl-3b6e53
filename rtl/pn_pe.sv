// pn_pe -- weight-stationary processing element (MAC unit) of the systolic
// array, built around the positive/negative approximate multiplier.
//
// The PE holds one weight and its 3-bit mode, loaded when w_load is high.
// Each cycle it multiplies the activation arriving from the left with the
// stored weight (pn_mult, in the stored mode), adds the partial sum arriving
// from above and registers the sum for the PE below; the activation is
// registered for the PE on the right. Both outputs therefore lag their inputs
// by one cycle. Replacing the exact multiplier of each MAC unit by the
// approximate one, with weights held in place, follows the paper; the
// register placement and the 32-bit accumulator are this design's choice.
module pn_pe
  import pn_pkg::*;
#(
  parameter int unsigned ACC_W = 32   // partial-sum width
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              w_load,    // capture w_in
  input  pn_wentry_t        w_in,      // {mode, weight}
  input  logic [DATA_W-1:0] a_in,      // activation from the left
  input  logic [ACC_W-1:0]  psum_in,   // partial sum from above
  output logic [DATA_W-1:0] a_out,     // activation to the right
  output logic [ACC_W-1:0]  psum_out   // partial sum to the PE below
);

  pn_wentry_t          wreg;
  logic [2*DATA_W-1:0] prod;

  pn_mult u_mult (
    .a    (a_in),
    .w    (wreg.w),
    .mode (wreg.mode),
    .p    (prod)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wreg     <= '0;
      a_out    <= '0;
      psum_out <= '0;
    end else begin
      if (w_load) wreg <= w_in;
      a_out    <= a_in;
      psum_out <= psum_in + ACC_W'(prod);
    end
  end

endmodule
