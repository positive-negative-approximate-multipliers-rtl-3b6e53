// pn_top -- DNN accelerator core with positive/negative approximate MACs.
//
// A ROWS x COLS weight-stationary systolic array (pn_array) computes
// G = B + sum W*A for COLS filters at once, each multiplication done in the
// mode (exact, positive error or negative error, with z = 1..3) that an
// offline mapping chose for its weight and that is stored with the weight.
// Around the array sit a weight buffer of TILES tiles (one word per array
// row: COLS entries of {3-bit mode, 8-bit weight}), a bias buffer (one word
// of COLS biases per tile) and the controller.
//
// Use: the host writes weight rows (word address tile*ROWS + row) and bias
// words (address tile), then issues a command {tile, count}. The controller
// loads the tile into the array (ROWS+1 cycles), accepts count activation
// vectors over act_valid/act_ready, and pulses done when the last result has
// come out. Each result vector appears on res_data with res_valid
// ROWS+COLS cycles after its activation vector was accepted, in order; the
// result stream cannot be stalled. The host must not rewrite the tile in use.
// The approximate multiplier and its stored modes follow the paper; the array
// size, buffers, command interface and handshakes are this design's choices.
module pn_top
  import pn_pkg::*;
#(
  parameter int unsigned ROWS  = 64,
  parameter int unsigned COLS  = 64,
  parameter int unsigned TILES = 8,
  parameter int unsigned ACC_W = 32,
  parameter int unsigned CNT_W = 16,
  localparam int unsigned TILE_AW = (TILES > 1) ? $clog2(TILES) : 1,
  localparam int unsigned WB_AW   = ((ROWS * TILES) > 1) ? $clog2(ROWS * TILES) : 1
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // weight buffer write port (host)
  input  logic                        wb_we,
  input  logic [WB_AW-1:0]            wb_addr,
  input  pn_wentry_t [COLS-1:0]       wb_wdata,
  // bias buffer write port (host)
  input  logic                        bb_we,
  input  logic [TILE_AW-1:0]          bb_addr,
  input  logic [COLS-1:0][ACC_W-1:0]  bb_wdata,
  // command
  input  logic                        cmd_valid,
  output logic                        cmd_ready,
  input  logic [TILE_AW-1:0]          cmd_tile,
  input  logic [CNT_W-1:0]            cmd_count,
  // activation stream
  input  logic                        act_valid,
  output logic                        act_ready,
  input  logic [ROWS-1:0][DATA_W-1:0] act_data,
  // result stream
  output logic                        res_valid,
  output logic [COLS-1:0][ACC_W-1:0]  res_data,
  // status
  output logic                        busy,
  output logic                        done
);

  localparam int unsigned ROW_AW = (ROWS > 1) ? $clog2(ROWS) : 1;
  localparam int unsigned LAT    = ROWS + COLS;

  logic                       wb_re, bb_re, wl_en, bias_load, arr_in_valid;
  logic [WB_AW-1:0]           wb_raddr;
  logic [TILE_AW-1:0]         bb_raddr;
  logic [ROW_AW-1:0]          wl_row;
  logic [COLS*WENTRY_W-1:0]   wb_rdata;
  logic [COLS*ACC_W-1:0]      bb_rdata;
  logic [COLS-1:0][ACC_W-1:0] bias_q;

  pn_buffer #(.DEPTH(ROWS * TILES), .WIDTH(COLS * WENTRY_W)) u_wbuf (
    .clk   (clk),
    .we    (wb_we),
    .waddr (wb_addr),
    .wdata (wb_wdata),
    .re    (wb_re),
    .raddr (wb_raddr),
    .rdata (wb_rdata)
  );

  pn_buffer #(.DEPTH(TILES), .WIDTH(COLS * ACC_W)) u_bbuf (
    .clk   (clk),
    .we    (bb_we),
    .waddr (bb_addr),
    .wdata (bb_wdata),
    .re    (bb_re),
    .raddr (bb_raddr),
    .rdata (bb_rdata)
  );

  pn_ctrl #(.ROWS(ROWS), .TILES(TILES), .LAT(LAT), .CNT_W(CNT_W)) u_ctrl (
    .clk          (clk),
    .rst_n        (rst_n),
    .cmd_valid    (cmd_valid),
    .cmd_ready    (cmd_ready),
    .cmd_tile     (cmd_tile),
    .cmd_count    (cmd_count),
    .wb_re        (wb_re),
    .wb_raddr     (wb_raddr),
    .bb_re        (bb_re),
    .bb_raddr     (bb_raddr),
    .wl_en        (wl_en),
    .wl_row       (wl_row),
    .bias_load    (bias_load),
    .act_valid    (act_valid),
    .act_ready    (act_ready),
    .arr_in_valid (arr_in_valid),
    .busy         (busy),
    .done         (done)
  );

  // Bias of the current tile, held for the whole command.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         bias_q <= '0;
    else if (bias_load) bias_q <= bb_rdata;
  end

  pn_array #(.ROWS(ROWS), .COLS(COLS), .ACC_W(ACC_W)) u_array (
    .clk       (clk),
    .rst_n     (rst_n),
    .wl_en     (wl_en),
    .wl_row    (wl_row),
    .wl_data   (wb_rdata),
    .bias      (bias_q),
    .in_valid  (arr_in_valid),
    .in_act    (act_data),
    .out_valid (res_valid),
    .out_res   (res_data)
  );

endmodule
