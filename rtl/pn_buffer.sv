// pn_buffer -- on-chip buffer with one write port and one read port.
//
// Used as the weight buffer, where each word is one array row of COLS
// {mode, weight} entries (the approximation mode of every weight is stored
// with it, 3 bits per weight), and as the bias buffer, one word of COLS
// biases per weight tile. Writes take effect at the clock edge; a read
// issued with re in cycle t returns its word on rdata in cycle t+1 and
// rdata holds until the next read. Storing the mode with the weight follows
// the paper; capacity, ports and latency are this design's choices, and the
// storage is a plain array rather than a process-specific macro.
module pn_buffer #(
  parameter int unsigned DEPTH = 512,
  parameter int unsigned WIDTH = 704,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

endmodule
