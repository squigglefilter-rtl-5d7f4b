// sf_dispatcher: assigns read prefixes to tiles and merges their decisions.
//
// Raw samples arrive as one stream in units of one query (QLEN samples of one
// read prefix, tag on the first sample).  At the start of a query the
// dispatcher picks a tile, in round-robin order starting after the tile it
// picked last, among the enabled tiles whose query buffer has a free bank, and
// sends all QLEN samples of the query there.  Tiles whose enable bit is low
// (for instance power-gated ones) are never picked.
//
// Decisions of all tiles are merged onto one result stream by a round-robin
// arbiter; res_tile says which tile made the decision.
//
// Interface: s_* is the incoming sample stream (valid/ready), t_* the per-tile
// sample streams; r_* the per-tile result streams, res_* the merged one.  A
// sample passes combinationally from s_* to the chosen t_* once a tile is
// chosen; choosing takes one cycle at the start of each query.
//
// Follows the paper: each read is given to an available tile; tiles can be
// switched off individually.  Own choices: everything else (the paper names
// the assignment but not how it is done).
module sf_dispatcher
  import sf_pkg::*;
#(
  parameter int unsigned N_TILES = DEF_N_TILES,
  parameter int unsigned QLEN    = DEF_N_PE,
  localparam int unsigned TW = (N_TILES > 1) ? $clog2(N_TILES) : 1,
  localparam int unsigned CW = $clog2(QLEN + 1)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [N_TILES-1:0] tile_en,
  // incoming samples
  input  logic               s_valid,
  output logic               s_ready,
  input  raw_t               s_data,
  input  rtag_t              s_tag,
  // to the tiles
  output logic [N_TILES-1:0] t_valid,
  input  logic [N_TILES-1:0] t_ready,
  output raw_t               t_data,
  output rtag_t              t_tag,
  // results of the tiles
  input  logic [N_TILES-1:0] r_valid,
  output logic [N_TILES-1:0] r_ready,
  input  result_t            r_res [N_TILES],
  // merged results
  output logic               res_valid,
  input  logic               res_ready,
  output result_t            res,
  output logic [TW-1:0]      res_tile
);

  // ---------------- sample routing ----------------
  logic          active;
  logic [TW-1:0] cur, last;
  logic [CW-1:0] cnt;
  logic          pick_ok;
  logic [TW-1:0] pick;

  always_comb begin
    pick_ok = 1'b0;
    pick    = '0;
    for (int unsigned k = 1; k <= N_TILES; k++) begin
      int unsigned t;
      t = (int'(last) + k) % N_TILES;
      if (!pick_ok && tile_en[t] && t_ready[t]) begin
        pick_ok = 1'b1;
        pick    = TW'(t);
      end
    end
  end

  always_comb begin
    t_valid = '0;
    if (active) t_valid[cur] = s_valid;
    s_ready = active && t_ready[cur];
  end
  assign t_data = s_data;
  assign t_tag  = s_tag;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0;
      cur    <= '0;
      last   <= TW'(N_TILES - 1);
      cnt    <= '0;
    end else if (!active) begin
      if (s_valid && pick_ok) begin
        active <= 1'b1;
        cur    <= pick;
        last   <= pick;
        cnt    <= '0;
      end
    end else if (s_valid && s_ready) begin
      if (cnt == CW'(QLEN - 1)) active <= 1'b0;
      cnt <= cnt + 1'b1;
    end
  end

  // ---------------- result merging ----------------
  logic [TW-1:0] rlast;
  logic          rgrant_ok;
  logic [TW-1:0] rgrant;

  always_comb begin
    rgrant_ok = 1'b0;
    rgrant    = '0;
    for (int unsigned k = 1; k <= N_TILES; k++) begin
      int unsigned t;
      t = (int'(rlast) + k) % N_TILES;
      if (!rgrant_ok && r_valid[t]) begin
        rgrant_ok = 1'b1;
        rgrant    = TW'(t);
      end
    end
    r_ready = '0;
    if (rgrant_ok) r_ready[rgrant] = res_ready;
  end

  assign res_valid = rgrant_ok;
  assign res       = r_res[rgrant];
  assign res_tile  = rgrant;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                     rlast <= TW'(N_TILES - 1);
    else if (res_valid && res_ready) rlast <= rgrant;
  end

  // a query is never split: samples only flow to the tile chosen for it
  assert property (@(posedge clk) disable iff (!rst_n) $onehot0(t_valid));

endmodule
