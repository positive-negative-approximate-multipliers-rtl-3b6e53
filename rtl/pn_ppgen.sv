// pn_ppgen -- run-time approximate generation of the n-th partial product.
//
// A 2:1 multiplexer chooses between 0 and the weight shifted left by N. Its
// select is  ZE'.NE + ZE.A[n]:
//   ze = 1            exact: the partial product is W<<n when A[n] = 1
//   ze = 0, ne = 1    forced: W<<n whatever A[n] is (negative error)
//   ze = 0, ne = 0    perforated: 0 (positive error)
// The multiplexer, its inputs and its select equation are the ones of the
// paper's partial-product figure, which uses this simple AND-type generation
// as its example. Purely combinational.
module pn_ppgen #(
  parameter int unsigned DATA_W = 8,
  parameter int unsigned N      = 0   // partial-product index (shift)
) (
  input  logic [DATA_W-1:0]   w,    // weight W_i
  input  logic                a_n,  // activation bit A_i[n]
  input  logic                ze,   // 1: this partial product is exact
  input  logic                ne,   // 1: force generation, 0: perforate
  output logic [2*DATA_W-1:0] pp    // approximate partial product AxPP_n
);

  logic sel;

  always_comb begin
    sel = (~ze & ne) | (ze & a_n);
    pp  = sel ? ((2*DATA_W)'(w) << N) : '0;
  end

endmodule
