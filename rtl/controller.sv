// controller: sequencing of one GEMV through the streaming datapath.
//
// A GEMV of reduction length num_tiles * n arrives as num_tiles consecutive
// valid tiles (bubbles allowed). The controller numbers the tiles, marks the
// first and the last one, and carries {valid, first, last} down a shift
// register of LAT stages - the latency from the core's input to the output
// accumulators (LUT build + FAC/reduction tree). There the flags steer the
// accumulators (acc_valid, acc_first); one cycle after the last tile has
// been accumulated out_valid is raised for one cycle, while the output
// registers hold the finished result.
//
// There is no back-pressure: the datapath accepts a tile every cycle.
// num_tiles is sampled with each GEMV's first tile and must not be zero.
// Synchronous active-low reset.
//
// The source architecture only names a controller; this protocol is this
// design's own.
module controller #(
  parameter int unsigned LAT   = 8,
  parameter int unsigned CNT_W = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [CNT_W-1:0] num_tiles,
  output logic             acc_valid,
  output logic             acc_first,
  output logic             out_valid,
  output logic [CNT_W-1:0] tile_idx     // index of the next tile to arrive
);

  typedef struct packed {
    logic v;
    logic first;
    logic last;
  } flags_t;

  logic [CNT_W-1:0] cnt, n_cur, n_eff;
  flags_t           f_in;
  flags_t           pipe [LAT];
  logic             last_acc;

  assign n_eff      = (cnt == '0) ? num_tiles : n_cur;
  assign f_in.v     = in_valid;
  assign f_in.first = in_valid && (cnt == '0);
  assign f_in.last  = in_valid && (cnt == n_eff - CNT_W'(1));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cnt   <= '0;
      n_cur <= '0;
    end else if (in_valid) begin
      if (cnt == '0) n_cur <= num_tiles;
      cnt <= f_in.last ? '0 : cnt + CNT_W'(1);
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int unsigned s = 0; s < LAT; s++) pipe[s] <= '0;
      last_acc <= 1'b0;
    end else begin
      pipe[0] <= f_in;
      for (int unsigned s = 1; s < LAT; s++) pipe[s] <= pipe[s-1];
      last_acc <= pipe[LAT-1].v && pipe[LAT-1].last;
    end
  end

  assign acc_valid = pipe[LAT-1].v;
  assign acc_first = pipe[LAT-1].first;
  assign out_valid = last_acc;
  assign tile_idx  = cnt;

  // A GEMV needs at least one tile.
  a_num_tiles: assert property (@(posedge clk) disable iff (!rst_n)
                                (in_valid && cnt == '0) |-> (num_tiles != '0));

endmodule
