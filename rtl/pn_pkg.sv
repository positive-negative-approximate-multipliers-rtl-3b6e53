// pn_pkg -- shared types and constants of the positive/negative approximate
// MAC array.
//
// Operands are unsigned 8-bit values (0..255), as in 8-bit post-training
// quantization. Every stored weight carries a 3-bit approximation mode. The
// mode names the number z of least-significant partial products that are
// approximated (1..3) and the sign of the error:
//   ZE  (z = 0)          exact product
//   PE  (z > 0, ne = 0)  the z least partial products are perforated (set to
//                        0): product = W*(A - A mod 2^z), error >= 0
//   NE  (z > 0, ne = 1)  the z least partial products are forced on:
//                        product = W*(A + 2^z-1 - A mod 2^z), error <= 0
// The three modes, the range of z and the 3-bit budget per weight follow the
// paper. How the three bits are laid out ({ne, z}) is this design's choice.
package pn_pkg;

  localparam int unsigned DATA_W = 8;          // weight and activation width
  localparam int unsigned PROD_W = 2 * DATA_W; // product width
  localparam int unsigned Z_MAX  = 3;          // largest z the mapping uses
  localparam int unsigned MODE_W = 3;          // mode bits stored per weight

  // 3-bit mode code stored next to each weight.
  typedef struct packed {
    logic       ne;  // 1: negative-error mode, 0: positive-error mode
    logic [1:0] z;   // approximated partial products; 0 selects exact (ZE)
  } pn_mode_t;

  // One weight-buffer entry: the weight and its mode (11 bits).
  typedef struct packed {
    pn_mode_t          mode;
    logic [DATA_W-1:0] w;
  } pn_wentry_t;

  localparam int unsigned WENTRY_W = $bits(pn_wentry_t);

  localparam pn_mode_t MODE_ZE = '{ne: 1'b0, z: 2'd0};

  // Controller states.
  typedef enum logic [1:0] {
    ST_IDLE,    // waiting for a command
    ST_LOAD,    // copying a weight tile from the buffer into the array
    ST_STREAM,  // accepting activation vectors
    ST_DRAIN    // waiting for the last result to leave the array
  } pn_state_t;

  // Builds a mode code.
  function automatic pn_mode_t pn_mode(input logic ne, input logic [1:0] z);
    pn_mode_t m;
    m.ne = ne;
    m.z  = z;
    return m;
  endfunction

  // Arithmetic form of the approximate product (Eq. 4 and 6 of the error
  // analysis): PE clears the z low activation bits, NE sets them.
  function automatic logic [PROD_W-1:0] pn_approx_ref(input logic [DATA_W-1:0] a,
                                                      input logic [DATA_W-1:0] w,
                                                      input pn_mode_t m);
    logic [DATA_W-1:0] low_mask;
    logic [DATA_W-1:0] a_eff;
    low_mask = DATA_W'((1 << m.z) - 1);
    if (m.z == 2'd0)  a_eff = a;
    else if (m.ne)    a_eff = a | low_mask;
    else              a_eff = a & ~low_mask;
    return PROD_W'(a_eff) * PROD_W'(w);
  endfunction

endpackage
