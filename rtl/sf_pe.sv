// sf_pe: one processing element of the SquiggleFilter systolic array.
//
// PE i holds query sample Q[i] and, while the reference streams past, computes
// one cell S[i,j] of the sDTW matrix per enabled cycle, j = c - i:
//
//   diag  = S[i-1,j-1] - B[i-1,j-1]          (diagonal: new reference sample)
//   vert  = S[i-1,j]                         (vertical: same reference sample)
//   move  = diag < vert
//   S[i,j] = |Q[i] - R[j]| + (move ? diag : vert)
//
// There is no horizontal term S[i,j-1] (the paper's "no reference deletions").
// B is the match bonus: BONUS times the number of query samples aligned to the
// reference sample of the cell, capped at MAX_BONUS + BONUS.  It is held as in
// the paper's PE figure: a register bonus_c1 that is cleared on a diagonal move
// and otherwise takes min(MAX_BONUS, incoming bonus), and an adder that adds
// BONUS on the way out.
//
// Registers (names follow the figure): ref_r = R[c-i]; score_c1 = S[i,j] of the
// previous cycle; bonus_c1; sb_c2 = score - bonus of the cell two cycles back;
// q_shift is the query shift chain and q_cur the query sample in use.  The
// valid bits travel with the reference sample so that the first column has no
// diagonal predecessor.
//
// Interface: everything advances only when en is high (a tile-wide stall).
// shift_en moves the query chain one PE on, independently of en; load copies
// the chain into q_cur.  Timing: one cell per enabled cycle, outputs registered.
//
// Follows the paper: the data flow of its PE figure, the recurrence of its
// algorithm section, BONUS = 10.  Own choices: the bonus is subtracted (the
// paper says it reduces the cost; the figure labels the node "score+bonus"),
// the vertical path takes the bonus of the vertical predecessor (the figure
// names the (c-2) bonus port, which belongs to the diagonal one), ties go to
// the vertical path, and the query is captured from the PE's own chain stage.
module sf_pe
  import sf_pkg::*;
#(
  parameter int unsigned BONUS     = DEF_BONUS,
  parameter int unsigned MAX_BONUS = DEF_MAX_BONUS
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   en,
  // query shift chain
  input  logic   shift_en,
  input  logic   load,
  input  samp_t  q_in,
  output samp_t  q_out,
  // reference stream (ref[c-i+1] in, ref[c-i] out)
  input  samp_t  ref_in,
  input  logic   ref_v_in,
  output samp_t  ref_out,
  output logic   ref_v_out,
  // from the previous PE
  input  cost_t  score_in,   // S[i-1, j]
  input  bonus_t bonus_in,   // B[i-1, j]
  input  cost_t  sb_in,      // S[i-1, j-1] - B[i-1, j-1]
  input  logic   sb_v_in,    // diagonal predecessor exists
  // to the next PE
  output cost_t  score_out,  // S[i, j] of the previous cycle
  output bonus_t bonus_out,
  output logic   score_v_out,
  output cost_t  sb_out,
  output logic   sb_v_out
);

  samp_t  q_shift, q_cur, ref_r;
  logic   ref_v;
  cost_t  score_c1, sb_c2;
  bonus_t bonus_c1;
  logic   v_c1, v_c2;

  // combinational cell
  logic                  move;
  cost_t                 best, score_new;
  logic [SAMP_W:0]       adiff;
  logic signed [SAMP_W:0] diff;
  bonus_t                bonus_new, bonus_capped;
  bonus_t                bonus_plus;

  always_comb begin
    diff  = {q_cur[SAMP_W-1], q_cur} - {ref_r[SAMP_W-1], ref_r};
    adiff = diff[SAMP_W] ? (SAMP_W+1)'(-diff) : (SAMP_W+1)'(diff);
    move  = sb_v_in && (sb_in < score_in);
    best  = move ? sb_in : score_in;
    score_new    = best + cost_t'(adiff);
    bonus_capped = (bonus_in > bonus_t'(MAX_BONUS)) ? bonus_t'(MAX_BONUS) : bonus_in;
    bonus_new    = move ? '0 : bonus_capped;
    bonus_plus   = bonus_c1 + bonus_t'(BONUS);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q_shift  <= '0;
      q_cur    <= '0;
    end else begin
      if (shift_en) q_shift <= q_in;
      if (load)     q_cur   <= q_shift;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ref_r    <= '0;
      ref_v    <= 1'b0;
      score_c1 <= '0;
      bonus_c1 <= '0;
      v_c1     <= 1'b0;
      sb_c2    <= '0;
      v_c2     <= 1'b0;
    end else if (en) begin
      ref_r    <= ref_in;
      ref_v    <= ref_v_in;
      score_c1 <= score_new;
      bonus_c1 <= bonus_new;
      v_c1     <= ref_v;
      sb_c2    <= score_c1 - cost_t'(bonus_plus);
      v_c2     <= v_c1;
    end
  end

  assign q_out       = q_shift;
  assign ref_out     = ref_r;
  assign ref_v_out   = ref_v;
  assign score_out   = score_c1;
  assign bonus_out   = bonus_plus;
  assign score_v_out = v_c1;
  assign sb_out      = sb_c2;
  assign sb_v_out    = v_c2;

endmodule
