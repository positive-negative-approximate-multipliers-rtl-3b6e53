// pn_mult -- 8x8 unsigned positive/negative approximate multiplier.
//
// The product is the sum of DATA_W partial products, one per activation bit.
// The mode code {ne, z} is decoded into per-partial-product controls: the z
// least partial products (n < z) are approximated (ze = 0) and the others are
// exact (ze = 1); ne decides whether the approximated ones are perforated (PE,
// positive error W*(A mod 2^z)) or forced on (NE, negative error
// -W*(2^z-1-A mod 2^z)). z = 0 gives the exact product (ZE).
//
// Only partial products 0..Z_MAX-1 carry the multiplexer of pn_ppgen; the
// rest are plain AND rows, since z never exceeds Z_MAX. The three modes, the
// decoding and the multiplexer follow the paper. The paper builds its
// multiplier on a library exact multiplier whose structure it does not give;
// here the partial products are simply added and the adder structure is left
// to synthesis. Purely combinational.
module pn_mult #(
  parameter int unsigned DATA_W = pn_pkg::DATA_W,
  parameter int unsigned Z_MAX  = pn_pkg::Z_MAX
) (
  input  logic [DATA_W-1:0]   a,     // activation
  input  logic [DATA_W-1:0]   w,     // weight
  input  pn_pkg::pn_mode_t    mode,  // approximation mode of this weight
  output logic [2*DATA_W-1:0] p      // approximate product
);

  logic [Z_MAX-1:0]    ze;            // exact control of the approximable rows
  logic [2*DATA_W-1:0] pp [DATA_W];

  // Mode decoder: partial product n is approximated when n < z.
  always_comb begin
    for (int unsigned n = 0; n < Z_MAX; n++)
      ze[n] = (n >= 32'(mode.z));
  end

  for (genvar n = 0; n < DATA_W; n++) begin : g_pp
    if (n < Z_MAX) begin : g_approx
      pn_ppgen #(.DATA_W(DATA_W), .N(n)) u_ppgen (
        .w   (w),
        .a_n (a[n]),
        .ze  (ze[n]),
        .ne  (mode.ne),
        .pp  (pp[n])
      );
    end else begin : g_exact
      assign pp[n] = a[n] ? ((2*DATA_W)'(w) << n) : '0;
    end
  end

  always_comb begin
    p = '0;
    for (int unsigned n = 0; n < DATA_W; n++)
      p = p + pp[n];
  end

endmodule
