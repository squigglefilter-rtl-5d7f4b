// squigglefilter: the SquiggleFilter read-classification accelerator.
//
// N_TILES independent tiles each hold a copy of the reference squiggle of the
// target virus and classify one read prefix at a time by subsequence dynamic
// time warping against it.  Raw samples of read prefixes arrive on one stream
// (fetched from DRAM by the host) and the dispatcher gives each prefix to a
// free, enabled tile; the tiles' decisions (eject or keep, with the minimum
// alignment cost) leave on one merged result stream, to be turned into Read
// Until eject commands for the sequencer by the host.
//
// Interface:
//   ref_we/ref_waddr/ref_wdata  writes the reference into every tile's buffer
//   ref_len                     reference length in samples (both strands)
//   threshold                   eject when the minimum cost exceeds it
//   tile_en                     per-tile enable (tiles that are switched off
//                               receive no reads)
//   s_*                         raw 10-bit samples, N_PE per query, tag with
//                               the first sample of each query
//   iscore_*[t], cur_tag[t]     per-tile intermediate-score streams to and
//                               from DRAM for multi-stage filtering
//   res_*                       merged decisions
// Latency of a decision: about ref_len + N_PE + 3 * N_PE cycles from the last
// sample of a query when the tile is idle; a tile accepts a new query every
// ref_len + N_PE + 4 cycles.
//
// Follows the paper: 5 tiles of 2000 PEs, 100 KB reference buffer per tile,
// ping-pong query buffers and a normaliser per tile, a programmable threshold,
// optional intermediate-score traffic.  Own choices: all interfaces and the
// way reads are assigned to tiles.
module squigglefilter
  import sf_pkg::*;
#(
  parameter int unsigned N_TILES   = DEF_N_TILES,
  parameter int unsigned N_PE      = DEF_N_PE,
  parameter int unsigned REF_DEPTH = DEF_REF_DEPTH,
  parameter int unsigned BONUS     = DEF_BONUS,
  parameter int unsigned MAX_BONUS = DEF_MAX_BONUS,
  localparam int unsigned RAW_AW = $clog2(REF_DEPTH),
  localparam int unsigned LEN_W  = $clog2(REF_DEPTH + 1),
  localparam int unsigned TW     = (N_TILES > 1) ? $clog2(N_TILES) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  // configuration
  input  logic               ref_we,
  input  logic [RAW_AW-1:0]  ref_waddr,
  input  samp_t              ref_wdata,
  input  logic [LEN_W-1:0]   ref_len,
  input  cost_t              threshold,
  input  logic [N_TILES-1:0] tile_en,
  // raw samples
  input  logic               s_valid,
  output logic               s_ready,
  input  raw_t               s_data,
  input  rtag_t              s_tag,
  // intermediate scores, one stream pair per tile
  input  logic [N_TILES-1:0] iscore_in_valid,
  output logic [N_TILES-1:0] iscore_in_ready,
  input  iscore_t            iscore_in [N_TILES],
  output logic [N_TILES-1:0] iscore_out_valid,
  input  logic [N_TILES-1:0] iscore_out_ready,
  output iscore_t            iscore_out [N_TILES],
  output rtag_t              cur_tag [N_TILES],
  // decisions
  output logic               res_valid,
  input  logic               res_ready,
  output result_t            res,
  output logic [TW-1:0]      res_tile,
  output logic [N_TILES-1:0] tile_busy
);

  logic [N_TILES-1:0] t_valid, t_ready, r_valid, r_ready;
  raw_t               t_data;
  rtag_t              t_tag;
  result_t            r_res [N_TILES];

  sf_dispatcher #(.N_TILES(N_TILES), .QLEN(N_PE)) u_disp (
    .clk      (clk),
    .rst_n    (rst_n),
    .tile_en  (tile_en),
    .s_valid  (s_valid),
    .s_ready  (s_ready),
    .s_data   (s_data),
    .s_tag    (s_tag),
    .t_valid  (t_valid),
    .t_ready  (t_ready),
    .t_data   (t_data),
    .t_tag    (t_tag),
    .r_valid  (r_valid),
    .r_ready  (r_ready),
    .r_res    (r_res),
    .res_valid(res_valid),
    .res_ready(res_ready),
    .res      (res),
    .res_tile (res_tile)
  );

  for (genvar t = 0; t < N_TILES; t++) begin : g_tile
    sf_tile #(
      .N_PE(N_PE), .REF_DEPTH(REF_DEPTH), .BONUS(BONUS), .MAX_BONUS(MAX_BONUS)
    ) u_tile (
      .clk             (clk),
      .rst_n           (rst_n),
      .ref_we          (ref_we),
      .ref_waddr       (ref_waddr),
      .ref_wdata       (ref_wdata),
      .ref_len         (ref_len),
      .threshold       (threshold),
      .q_valid         (t_valid[t]),
      .q_ready         (t_ready[t]),
      .q_data          (t_data),
      .q_tag           (t_tag),
      .iscore_in_valid (iscore_in_valid[t]),
      .iscore_in_ready (iscore_in_ready[t]),
      .iscore_in       (iscore_in[t]),
      .iscore_out_valid(iscore_out_valid[t]),
      .iscore_out_ready(iscore_out_ready[t]),
      .iscore_out      (iscore_out[t]),
      .cur_tag         (cur_tag[t]),
      .res_valid       (r_valid[t]),
      .res_ready       (r_ready[t]),
      .res             (r_res[t]),
      .busy            (tile_busy[t])
    );
  end

endmodule
