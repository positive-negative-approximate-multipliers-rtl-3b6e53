// pn_ctrl -- command controller of the approximate MAC array.
//
// A command (cmd_valid && cmd_ready) names a weight tile and a number of
// activation vectors. The controller then
//   LOAD   reads the tile's ROWS weight rows from the weight buffer, one per
//          cycle, and writes each into the array one cycle later (the buffer
//          has one cycle of read latency); the tile's bias word is read in
//          the first cycle and captured by the top with bias_load;
//          LOAD takes ROWS+1 cycles;
//   STREAM raises act_ready and passes each accepted activation vector
//          (act_valid && act_ready) into the array, until cmd_count vectors
//          have gone in; the host may pause (act_valid low) at any time;
//   DRAIN  waits LAT cycles after the last vector, until its result has left
//          the array, and pulses done in the cycle that result is valid.
// Weights and modes stay fixed in the array for the whole command
// (weight-stationary operation, as in the paper). The command format,
// handshake and states are this design's choices.
module pn_ctrl
  import pn_pkg::*;
#(
  parameter int unsigned ROWS  = 64,
  parameter int unsigned TILES = 8,
  parameter int unsigned LAT   = 128,   // array latency, ROWS + COLS
  parameter int unsigned CNT_W = 16,
  localparam int unsigned ROW_AW  = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned TILE_AW = (TILES > 1) ? $clog2(TILES) : 1,
  localparam int unsigned WB_AW   = ((ROWS * TILES) > 1) ? $clog2(ROWS * TILES) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  // command
  input  logic               cmd_valid,
  output logic               cmd_ready,
  input  logic [TILE_AW-1:0] cmd_tile,
  input  logic [CNT_W-1:0]   cmd_count,
  // buffer reads
  output logic               wb_re,
  output logic [WB_AW-1:0]   wb_raddr,
  output logic               bb_re,
  output logic [TILE_AW-1:0] bb_raddr,
  // array weight loading
  output logic               wl_en,
  output logic [ROW_AW-1:0]  wl_row,
  output logic               bias_load,
  // activation stream
  input  logic               act_valid,
  output logic               act_ready,
  output logic               arr_in_valid,
  // status
  output logic               busy,
  output logic               done
);

  localparam int unsigned LCNT_W = $clog2(ROWS + 1);
  localparam int unsigned DCNT_W = (LAT > 1) ? $clog2(LAT) : 1;

  pn_state_t            state;
  logic [TILE_AW-1:0]   tile_q;
  logic [CNT_W-1:0]     remaining;
  logic [LCNT_W-1:0]    lcnt;
  logic [DCNT_W-1:0]    dcnt;
  logic                 fire;

  assign cmd_ready    = (state == ST_IDLE);
  assign act_ready    = (state == ST_STREAM);
  assign fire         = act_valid && act_ready;
  assign arr_in_valid = fire;
  assign busy         = (state != ST_IDLE);
  assign done         = (state == ST_DRAIN) && (dcnt == DCNT_W'(LAT - 1));

  assign wb_re    = (state == ST_LOAD) && (lcnt < LCNT_W'(ROWS));
  assign wb_raddr = WB_AW'(tile_q) * WB_AW'(ROWS) + WB_AW'(lcnt);
  assign bb_re    = (state == ST_LOAD) && (lcnt == '0);
  assign bb_raddr = tile_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= ST_IDLE;
      tile_q    <= '0;
      remaining <= '0;
      lcnt      <= '0;
      dcnt      <= '0;
      wl_en     <= 1'b0;
      wl_row    <= '0;
      bias_load <= 1'b0;
    end else begin
      // Buffer data returns one cycle after the read.
      wl_en     <= wb_re;
      wl_row    <= ROW_AW'(lcnt);
      bias_load <= bb_re;
      unique case (state)
        ST_IDLE: begin
          if (cmd_valid) begin
            state     <= ST_LOAD;
            tile_q    <= cmd_tile;
            remaining <= cmd_count;
            lcnt      <= '0;
          end
        end
        ST_LOAD: begin
          lcnt <= lcnt + 1'b1;
          if (lcnt == LCNT_W'(ROWS)) begin
            dcnt  <= '0;
            state <= (remaining == '0) ? ST_DRAIN : ST_STREAM;
          end
        end
        ST_STREAM: begin
          if (fire) begin
            remaining <= remaining - 1'b1;
            if (remaining == CNT_W'(1)) begin
              dcnt  <= '0;
              state <= ST_DRAIN;
            end
          end
        end
        ST_DRAIN: begin
          dcnt <= dcnt + 1'b1;
          if (dcnt == DCNT_W'(LAT - 1)) state <= ST_IDLE;
        end
        default: state <= ST_IDLE;
      endcase
    end
  end

  // A command must name an existing tile.
  a_tile: assert property (@(posedge clk) disable iff (!rst_n)
                           (cmd_valid && cmd_ready) |-> (32'(cmd_tile) < TILES))
    else $error("pn_ctrl: tile %0d out of range", cmd_tile);

endmodule
