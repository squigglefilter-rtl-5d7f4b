// tb_sf_tile: self-checking testbench of one tile.
//
// Small tile: 8 PEs, 48-sample reference.  Raw reads are generated as random
// squiggles; "target" reads have the reference built so that it contains their
// normalised samples, "other" reads do not.  The expected decision and minimum
// cost come from the integer normalisation followed by the cell-by-cell sDTW
// model.  A read split in two stages is checked too: its first query saves the
// last-row scores into a memory model, its second query continues from them
// and must give the costs of one 16-row query.  The memory model and the
// result consumer stall at random.  Without stalls a tile must classify a read
// every ref_len + N_PE + 4 cycles.
module tb_sf_tile;
  import sf_pkg::*;
  import sf_tb_pkg::*;

  localparam int N = 8;
  localparam int DEPTH = 64;
  localparam int M = 48;
  localparam int LW = $clog2(DEPTH + 1);

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic ref_we, q_valid, q_ready, isi_valid, isi_ready, iso_valid, iso_ready, res_valid, res_ready, busy;
  logic [$clog2(DEPTH)-1:0] ref_waddr;
  samp_t ref_wdata;
  logic [LW-1:0] ref_len;
  cost_t threshold;
  raw_t q_data;
  rtag_t q_tag, cur_tag;
  iscore_t isi, iso;
  result_t res;

  int checks = 0, failures = 0;
  int stalls_in = 0, stalls_out = 0, saves = 0, conts = 0, ejects = 0, keeps = 0;
  bit random_stall = 1'b1;

  always #5 clk = !clk;

  sf_tile #(.N_PE(N), .REF_DEPTH(DEPTH)) dut (
    .clk(clk), .rst_n(rst_n), .ref_we(ref_we), .ref_waddr(ref_waddr), .ref_wdata(ref_wdata),
    .ref_len(ref_len), .threshold(threshold), .q_valid(q_valid), .q_ready(q_ready),
    .q_data(q_data), .q_tag(q_tag), .iscore_in_valid(isi_valid), .iscore_in_ready(isi_ready),
    .iscore_in(isi), .iscore_out_valid(iso_valid), .iscore_out_ready(iso_ready),
    .iscore_out(iso), .cur_tag(cur_tag), .res_valid(res_valid), .res_ready(res_ready),
    .res(res), .busy(busy)
  );

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // ---------------- memory model for intermediate scores ----------------
  int store_c [32][$];
  int store_b [32][$];
  int rd_pos;
  always @(negedge clk) begin
    if (!rst_n) begin
      isi_valid = 1'b0; iso_ready = 1'b0; rd_pos = 0;
    end else begin
      if (isi_valid && isi_ready) rd_pos++;
      if (iso_valid && iso_ready) begin
        store_c[int'(cur_tag.id)].push_back(int'(iso.cost));
        store_b[int'(cur_tag.id)].push_back(int'(iso.bonus));
      end
      if (rd_pos == M) rd_pos = 0;
      iso_ready = random_stall ? ($urandom_range(5) != 0) : 1'b1;
      isi_valid = 1'b0;
      if (cur_tag.cont && rd_pos < store_c[int'(cur_tag.id)].size()) begin
        isi_valid = random_stall ? ($urandom_range(5) != 0) : 1'b1;
        isi.cost  = cost_t'(store_c[int'(cur_tag.id)][rd_pos]);
        isi.bonus = bonus_t'(store_b[int'(cur_tag.id)][rd_pos]);
      end
      if (cur_tag.cont && rd_pos > 0 && rd_pos < M && !isi_valid) stalls_in++;
      if (iso_valid && !iso_ready) stalls_out++;
    end
  end

  // ---------------- result checker ----------------
  result_t exp_q [$];
  int res_times [$];
  int cyc = 0;
  always @(posedge clk) cyc++;
  always @(negedge clk) begin
    if (rst_n) begin
      if (res_valid && res_ready) begin
        result_t e;
        res_times.push_back(cyc);
        if (exp_q.size() == 0) check(1'b0, "unexpected result");
        else begin
          e = exp_q.pop_front();
          check(res.id == e.id, $sformatf("result id %0d != %0d", res.id, e.id));
          check(res.min_cost == e.min_cost, $sformatf("read %0d min cost %0d != %0d", e.id, res.min_cost, e.min_cost));
          check(res.eject == e.eject, $sformatf("read %0d eject %0d != %0d", e.id, res.eject, e.eject));
          if (res.eject) ejects++; else keeps++;
        end
      end
      res_ready = random_stall ? ($urandom_range(3) != 0) : 1'b1;
    end else res_ready = 1'b0;
  end

  task automatic send(int x[], rtag_t tg);
    for (int k = 0; k < x.size(); k++) begin
      @(negedge clk);
      q_valid = 1'b1; q_data = raw_t'(x[k]); q_tag = tg;
      @(posedge clk);
      while (!q_ready) @(posedge clk);
      #1 q_valid = 1'b0;
    end
  endtask

  int r[];
  int prev_c [32][];
  int prev_b [32][];

  // expected result of a query with normalised samples z
  task automatic expect_query(int z[], rtag_t tg);
    int oc[], ob[];
    result_t e;
    sdtw_rows(z, r, tg.cont, prev_c[int'(tg.id)], prev_b[int'(tg.id)], DEF_BONUS, DEF_MAX_BONUS, oc, ob);
    prev_c[int'(tg.id)] = oc;
    prev_b[int'(tg.id)] = ob;
    e.id = tg.id;
    e.min_cost = cost_t'(min_of(oc));
    e.eject = min_of(oc) > int'(threshold);
    exp_q.push_back(e);
  endtask

  initial begin
    int xs[8][], zs[8][], zlong[], oc[], ob[];
    rtag_t tg;
    ref_we = 1'b0; ref_waddr = '0; ref_wdata = '0; q_valid = 1'b0; q_data = '0; q_tag = '0;
    threshold = cost_t'(100);
    ref_len = LW'(M);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // raw reads; reads 0, 2 are targets: the reference contains them
    for (int k = 0; k < 8; k++) begin
      make_levels(N, 200 + 30 * k, 800 - 20 * k, xs[k]);
      norm_exact(xs[k], zs[k]);
    end
    r = new[M];
    foreach (r[j]) r[j] = int'($urandom_range(255)) - 128;
    for (int k = 0; k < N; k++) begin
      r[5 + k]  = zs[0][k];
      r[30 + k] = zs[2][k];
    end
    for (int j = 0; j < M; j++) begin
      @(negedge clk);
      ref_we = 1'b1; ref_waddr = ($clog2(DEPTH))'(j); ref_wdata = samp_t'(r[j]);
    end
    @(negedge clk);
    ref_we = 1'b0;

    // single-stage reads 0..3 (0 and 2 match), with random stalls
    for (int k = 0; k < 4; k++) begin
      tg = '{id: read_id_t'(k), cont: 1'b0, save: 1'b0};
      expect_query(zs[k], tg);
      send(xs[k], tg);
    end
    // two-stage read 10: reads 4 then 5 as its two queries
    tg = '{id: read_id_t'(10), cont: 1'b0, save: 1'b1};
    expect_query(zs[4], tg);
    send(xs[4], tg);
    tg = '{id: read_id_t'(10), cont: 1'b1, save: 1'b0};
    expect_query(zs[5], tg);
    send(xs[5], tg);
    while (exp_q.size() != 0) @(negedge clk);
    // the continued query must equal one 16-row query
    zlong = new[2 * N];
    foreach (zlong[k]) zlong[k] = (k < N) ? zs[4][k] : zs[5][k - N];
    sdtw_rows(zlong, r, 1'b0, oc, ob, DEF_BONUS, DEF_MAX_BONUS, oc, ob);
    check(min_of(oc) == min_of(prev_c[10]), "two stages equal one long query");
    check(store_c[10].size() == M, "intermediate scores written");
    saves = store_c[10].size();

    // back-to-back reads without stalls: one result every M + N + 4 cycles
    random_stall = 1'b0;
    repeat (5) @(negedge clk);
    res_times.delete();
    fork
      for (int k = 0; k < 4; k++) begin
        tg = '{id: read_id_t'(20 + k), cont: 1'b0, save: 1'b0};
        expect_query(zs[k], tg);
        send(xs[k], tg);
      end
    join
    while (exp_q.size() != 0) @(negedge clk);
    for (int k = 2; k < res_times.size(); k++)
      check(res_times[k] - res_times[k-1] == M + N + 4,
            $sformatf("result interval %0d != %0d", res_times[k] - res_times[k-1], M + N + 4));
    check(res_times.size() == 4, "four results");
    check(stalls_in > 0 && stalls_out > 0, "intermediate-score stalls exercised");
    check(ejects > 0 && keeps > 0, "both decisions seen");
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
