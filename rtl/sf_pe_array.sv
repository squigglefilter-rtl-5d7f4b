// sf_pe_array: the 1D systolic array of one SquiggleFilter tile.
//
// N_PE processing elements are chained: the query shifts in through PE[0]
// (the sample that enters first ends in PE[N_PE-1]), the reference streams in
// through PE[0] one sample per enabled cycle, and each PE passes its cost,
// bonus and cost-minus-bonus to the next.  The sDTW matrix is thus computed
// along anti-diagonals: PE i works on reference column c - i in cycle c.
//
// PE[0]'s predecessor row is the boundary.  For a new read it is all zeros,
// so an alignment may start at any reference position.  For the continuation
// of a read (query longer than N_PE, multi-stage filtering) it is the last row
// of the previous stage, read back from memory as intermediate scores iscore_in,
// which are presented together with the reference sample of the same column.
// The first column of a continuation then has no diagonal predecessor.
//
// Interface: en stalls the whole array; shift_en / load drive the query chain;
// ref_in / ref_v_in / iscore_in enter together; cont selects the boundary.
// Outputs are the last PE's cost, bonus and valid, N_PE + 1 enabled cycles
// after the reference column entered (the boundary / reference register of
// PE[0], then one cost register per PE).
//
// Follows the paper: its tile figure (N = 2000 PEs, query_init / ref / score
// links, intermediate scores into PE[0] and out of PE[N-1]).  Own choice: the
// bonus travels with the intermediate cost so that a continued query gives the
// same costs as one long array.
module sf_pe_array
  import sf_pkg::*;
#(
  parameter int unsigned N_PE      = DEF_N_PE,
  parameter int unsigned BONUS     = DEF_BONUS,
  parameter int unsigned MAX_BONUS = DEF_MAX_BONUS
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    en,
  input  logic    shift_en,
  input  logic    load,
  input  samp_t   q_in,
  input  logic    cont,
  input  samp_t   ref_in,
  input  logic    ref_v_in,
  input  iscore_t iscore_in,
  output iscore_t iscore_out,
  output logic    iscore_v_out
);

  // links: index k is the input of PE[k]; index N_PE is the output of the last
  samp_t  q_l     [N_PE+1];
  samp_t  ref_l   [N_PE+1];
  logic   refv_l  [N_PE+1];
  cost_t  score_l [N_PE+1];
  bonus_t bonus_l [N_PE+1];
  logic   scv_l   [N_PE+1];
  cost_t  sb_l    [N_PE+1];
  logic   sbv_l   [N_PE+1];

  // boundary row for PE[0]
  iscore_t bnd_r;
  logic    bnd_v;
  cost_t   bnd_sb;
  logic    bnd_sb_v;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bnd_r    <= '0;
      bnd_v    <= 1'b0;
      bnd_sb   <= '0;
      bnd_sb_v <= 1'b0;
    end else if (en) begin
      bnd_r    <= cont ? iscore_in : '0;
      bnd_v    <= ref_v_in;
      bnd_sb   <= cont ? bnd_r.cost - cost_t'(bnd_r.bonus) : '0;
      bnd_sb_v <= bnd_v || !cont;
    end
  end

  assign q_l[0]     = q_in;
  assign ref_l[0]   = ref_in;
  assign refv_l[0]  = ref_v_in;
  assign score_l[0] = bnd_r.cost;
  assign bonus_l[0] = bnd_r.bonus;
  assign scv_l[0]   = bnd_v;
  assign sb_l[0]    = bnd_sb;
  assign sbv_l[0]   = bnd_sb_v;

  for (genvar k = 0; k < N_PE; k++) begin : g_pe
    sf_pe #(.BONUS(BONUS), .MAX_BONUS(MAX_BONUS)) u_pe (
      .clk        (clk),
      .rst_n      (rst_n),
      .en         (en),
      .shift_en   (shift_en),
      .load       (load),
      .q_in       (q_l[k]),
      .q_out      (q_l[k+1]),
      .ref_in     (ref_l[k]),
      .ref_v_in   (refv_l[k]),
      .ref_out    (ref_l[k+1]),
      .ref_v_out  (refv_l[k+1]),
      .score_in   (score_l[k]),
      .bonus_in   (bonus_l[k]),
      .sb_in      (sb_l[k]),
      .sb_v_in    (sbv_l[k]),
      .score_out  (score_l[k+1]),
      .bonus_out  (bonus_l[k+1]),
      .score_v_out(scv_l[k+1]),
      .sb_out     (sb_l[k+1]),
      .sb_v_out   (sbv_l[k+1])
    );
  end

  assign iscore_out.cost  = score_l[N_PE];
  assign iscore_out.bonus = bonus_l[N_PE];
  assign iscore_v_out     = scv_l[N_PE];

endmodule
