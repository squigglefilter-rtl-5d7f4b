// tb_sf_pe_array: self-checking testbench of the systolic array.
//
// A small array (8 PEs, references of 40 and 50 samples) is checked against
// the cell-by-cell sDTW model: a new read with random query and reference, a
// continuation that takes the first read's last row as its boundary (which
// must equal one 16-row query), and the same with random stalls.  Without
// stalls the first last-row cost must leave N_PE + 1 cycles after the first
// reference sample entered.
module tb_sf_pe_array;
  import sf_pkg::*;
  import sf_tb_pkg::*;

  localparam int N = 8;

  logic    clk = 1'b0;
  logic    rst_n = 1'b0;
  logic    en, shift_en, load, cont, ref_v_in;
  samp_t   q_in, ref_in;
  iscore_t iscore_in, iscore_out;
  logic    iscore_v_out;

  int checks = 0, failures = 0;

  always #5 clk = !clk;

  sf_pe_array #(.N_PE(N)) dut (
    .clk(clk), .rst_n(rst_n), .en(en), .shift_en(shift_en), .load(load), .q_in(q_in),
    .cont(cont), .ref_in(ref_in), .ref_v_in(ref_v_in), .iscore_in(iscore_in),
    .iscore_out(iscore_out), .iscore_v_out(iscore_v_out)
  );

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic load_query(int q[]);
    for (int k = N - 1; k >= 0; k--) begin
      @(negedge clk);
      shift_en = 1'b1;
      q_in     = samp_t'(q[k]);
    end
    @(negedge clk);
    shift_en = 1'b0;
    load     = 1'b1;
    @(negedge clk);
    load     = 1'b0;
  endtask

  // streams r through the array and collects the last row
  task automatic run(int r[], bit c, int bc[], int bb[], bit stalls,
                     output int oc[], output int ob[], output int lat);
    int m, sent, got, cyc, first_in;
    m = r.size();
    oc = new[m];
    ob = new[m];
    sent = 0;
    got = 0;
    cyc = 0;
    first_in = -1;
    lat = -1;
    cont = c;
    while (got < m && cyc < 10000) begin
      @(negedge clk);
      cyc++;
      en = stalls ? ($urandom_range(3) != 0) : 1'b1;
      if (en && iscore_v_out) begin
        oc[got] = int'(iscore_out.cost);
        ob[got] = int'(iscore_out.bonus);
        if (got == 0) lat = cyc - first_in;
        got++;
      end
      if (en) begin
        ref_v_in = (sent < m);
        if (sent < m) begin
          ref_in    = samp_t'(r[sent]);
          iscore_in.cost  = c ? cost_t'(bc[sent]) : '0;
          iscore_in.bonus = c ? bonus_t'(bb[sent]) : '0;
          if (sent == 0) first_in = cyc;
          sent++;
        end
      end
    end
    @(negedge clk);
    ref_v_in = 1'b0;
    en = 1'b1;
    repeat (N + 4) @(negedge clk);
  endtask

  initial begin
    int q1[], q2[], q12[], r[], r2[], ec[], eb[], oc[], ob[], oc2[], ob2[], ec2[], eb2[];
    int lat;
    en = 1'b1; shift_en = 1'b0; load = 1'b0; cont = 1'b0; ref_v_in = 1'b0;
    q_in = '0; ref_in = '0; iscore_in = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    for (int trial = 0; trial < 3; trial++) begin
      bit st;
      st = (trial == 2);
      q1 = new[N]; q2 = new[N]; q12 = new[2*N]; r = new[40];
      foreach (q1[k]) q1[k] = int'($urandom_range(255)) - 128;
      foreach (q2[k]) q2[k] = int'($urandom_range(255)) - 128;
      // make part of the reference resemble the query so costs stay varied
      foreach (r[k]) r[k] = int'($urandom_range(255)) - 128;
      for (int k = 0; k < N; k++) r[10 + k] = q1[k] + int'($urandom_range(6)) - 3;
      foreach (q12[k]) q12[k] = (k < N) ? q1[k] : q2[k-N];

      // stage 1: new read
      load_query(q1);
      run(r, 1'b0, ec, eb, st, oc, ob, lat);
      sdtw_rows(q1, r, 1'b0, ec, eb, DEF_BONUS, DEF_MAX_BONUS, ec, eb);
      foreach (ec[j]) begin
        check(oc[j] == ec[j], $sformatf("stage1 t%0d cost[%0d] %0d != %0d", trial, j, oc[j], ec[j]));
        check(ob[j] == eb[j], $sformatf("stage1 t%0d bonus[%0d] %0d != %0d", trial, j, ob[j], eb[j]));
      end
      if (!st) check(lat == N + 1, $sformatf("latency %0d != %0d", lat, N + 1));

      // stage 2: continuation with the intermediate scores of stage 1
      load_query(q2);
      run(r, 1'b1, oc, ob, st, oc2, ob2, lat);
      sdtw_rows(q12, r, 1'b0, ec2, eb2, DEF_BONUS, DEF_MAX_BONUS, ec2, eb2);
      foreach (ec2[j]) begin
        check(oc2[j] == ec2[j], $sformatf("stage2 t%0d cost[%0d] %0d != %0d", trial, j, oc2[j], ec2[j]));
        check(ob2[j] == eb2[j], $sformatf("stage2 t%0d bonus[%0d] %0d != %0d", trial, j, ob2[j], eb2[j]));
      end
    end

    // a query that matches the reference exactly earns bonuses: the cost must
    // end below zero somewhere (the bonus reduces the cost)
    r2 = new[50];
    make_levels(50, -100, 100, r2);
    q1 = new[N];
    for (int k = 0; k < N; k++) q1[k] = r2[20 + k];
    load_query(q1);
    run(r2, 1'b0, ec, eb, 1'b0, oc, ob, lat);
    sdtw_rows(q1, r2, 1'b0, ec, eb, DEF_BONUS, DEF_MAX_BONUS, ec, eb);
    foreach (ec[j]) check(oc[j] == ec[j], $sformatf("match cost[%0d] %0d != %0d", j, oc[j], ec[j]));
    check(min_of(oc) < 0, "exact match should give a negative cost");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
