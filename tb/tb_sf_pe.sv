// tb_sf_pe: self-checking testbench of one processing element.
//
// Drives random query, reference, predecessor costs and bonuses into one PE
// and checks its registered outputs against the cell equation one and two
// cycles later: cost = |Q-R| + min(diagonal, vertical) with the diagonal only
// when it exists and is strictly smaller, the bonus reset to BONUS on a
// diagonal step and grown by BONUS (capped) on a vertical one, and the
// cost-minus-bonus value a cycle after.  Also checks the query shift chain,
// the load, the reference pass-through and that en = 0 freezes the cell.
module tb_sf_pe;
  import sf_pkg::*;

  logic   clk = 1'b0;
  logic   rst_n = 1'b0;
  logic   en, shift_en, load, ref_v_in, sb_v_in;
  samp_t  q_in, q_out, ref_in, ref_out;
  logic   ref_v_out, score_v_out, sb_v_out;
  cost_t  score_in, sb_in, score_out, sb_out;
  bonus_t bonus_in, bonus_out;

  int checks = 0, failures = 0;
  int moves = 0, verts = 0;

  always #5 clk = !clk;

  sf_pe dut (
    .clk(clk), .rst_n(rst_n), .en(en), .shift_en(shift_en), .load(load),
    .q_in(q_in), .q_out(q_out), .ref_in(ref_in), .ref_v_in(ref_v_in),
    .ref_out(ref_out), .ref_v_out(ref_v_out), .score_in(score_in),
    .bonus_in(bonus_in), .sb_in(sb_in), .sb_v_in(sb_v_in),
    .score_out(score_out), .bonus_out(bonus_out), .score_v_out(score_v_out),
    .sb_out(sb_out), .sb_v_out(sb_v_out)
  );

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic int iabs(int v);
    return (v < 0) ? -v : v;
  endfunction

  initial begin
    int q, r, sc, sb, bo, exp_cost, exp_bonus, prev_cost;
    bit dv, mv;
    en = 1'b1; shift_en = 1'b0; load = 1'b0; ref_v_in = 1'b0; sb_v_in = 1'b0;
    q_in = '0; ref_in = '0; score_in = '0; sb_in = '0; bonus_in = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;

    for (int t = 0; t < 400; t++) begin
      // new query sample through the chain, then load
      q = int'($urandom_range(255)) - 128;
      @(negedge clk);
      shift_en = 1'b1; q_in = samp_t'(q);
      @(negedge clk);
      shift_en = 1'b0;
      check(int'(q_out) == q, "shift chain");
      load = 1'b1;
      @(negedge clk);
      load = 1'b0;
      // present the reference sample (registered into the PE)
      r = int'($urandom_range(255)) - 128;
      ref_in = samp_t'(r); ref_v_in = 1'b1;
      @(negedge clk);
      check(int'(ref_out) == r && ref_v_out, "reference pass-through");
      ref_v_in = 1'b0;
      prev_cost = int'(score_out);
      // predecessor values for the cell
      sc = int'($urandom_range(2000)) - 500;
      sb = (t % 3 == 0) ? sc : int'($urandom_range(2000)) - 500;
      bo = int'($urandom_range(120));
      dv = ($urandom_range(4) != 0);
      score_in = cost_t'(sc); sb_in = cost_t'(sb); bonus_in = bonus_t'(bo); sb_v_in = dv;
      mv = dv && (sb < sc);
      if (mv) moves++; else verts++;
      exp_cost  = iabs(q - r) + (mv ? sb : sc);
      exp_bonus = mv ? DEF_BONUS : (((bo > DEF_MAX_BONUS) ? DEF_MAX_BONUS : bo) + DEF_BONUS);
      // a stalled cycle must not change the cell
      en = 1'b0;
      @(negedge clk);
      check(int'(score_out) == prev_cost, "stall holds the cost");
      en = 1'b1;
      @(negedge clk);
      en = 1'b0;
      check(int'(score_out) == exp_cost,
            $sformatf("cost %0d != %0d (q=%0d r=%0d sc=%0d sb=%0d dv=%0d)", score_out, exp_cost, q, r, sc, sb, dv));
      check(int'(bonus_out) == exp_bonus, $sformatf("bonus %0d != %0d", bonus_out, exp_bonus));
      check(score_v_out, "cost valid");
      en = 1'b1;
      @(negedge clk);
      check(int'(sb_out) == exp_cost - exp_bonus, $sformatf("cost-bonus %0d != %0d", sb_out, exp_cost - exp_bonus));
      check(sb_v_out, "cost-bonus valid");
    end
    check(moves > 20 && verts > 20, "both paths exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
