// tb_sf_normalizer: self-checking testbench of the normaliser.
//
// A behavioural query-buffer bank (synchronous read) holds one query of raw
// 10-bit samples.  The output must equal the integer normalisation exactly,
// be within one step of the floating-point mean/MAD normalisation, come out
// last sample first on consecutive cycles, wait for out_ready, and include
// clipped outliers.  Queries: random squiggles with spikes, a flat signal.
// The time from the bank being offered to the first output is checked against
// the three passes (about 3 * N cycles plus the division).
module tb_sf_normalizer;
  import sf_pkg::*;
  import sf_tb_pkg::*;

  localparam int N = 200;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic rd_avail, rd_release, out_ready, out_valid, out_last;
  rtag_t rd_tag, out_tag;
  logic [$clog2(N)-1:0] rd_addr;
  raw_t rd_data;
  samp_t out_data;
  int checks = 0, failures = 0, clipped = 0;
  int bank [N];

  always #5 clk = !clk;
  always_ff @(posedge clk) rd_data <= raw_t'(bank[rd_addr]);

  sf_normalizer #(.N(N)) dut (
    .clk(clk), .rst_n(rst_n), .rd_avail(rd_avail), .rd_tag(rd_tag), .rd_addr(rd_addr),
    .rd_data(rd_data), .rd_release(rd_release), .out_ready(out_ready),
    .out_valid(out_valid), .out_data(out_data), .out_last(out_last), .out_tag(out_tag)
  );

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  task automatic one_query(int x[], int id);
    int ze[], zr[], got, t1;
    norm_exact(x, ze);
    norm_real(x, zr);
    foreach (x[k]) bank[k] = x[k];
    rd_tag = '{id: read_id_t'(id), cont: 1'b0, save: 1'b1};
    out_ready = 1'b0;
    @(negedge clk);
    rd_avail = 1'b1;
    // hold out_ready low for a while: nothing may come out
    for (int c = 0; c < 3 * N + 200; c++) begin
      @(negedge clk);
      check(!out_valid, "no output before out_ready");
    end
    out_ready = 1'b1;
    got = 0;
    t1 = 0;
    while (got < N && t1 < 10 * N) begin
      @(negedge clk);
      t1++;
      if (rd_release) rd_avail = 1'b0;
      if (out_valid) begin
        int k;
        k = N - 1 - got;
        check(int'(out_data) == ze[k], $sformatf("q%0d sample %0d: %0d != exact %0d", id, k, out_data, ze[k]));
        check(iabs(int'(out_data) - zr[k]) <= 1, $sformatf("q%0d sample %0d: %0d far from %0d", id, k, out_data, zr[k]));
        check(out_last == (got == N - 1), "out_last");
        if (ze[k] == 127 || ze[k] == -128) clipped++;
        got++;
      end else if (got > 0) begin
        check(1'b0, "gap in output stream");
      end
    end
    check(got == N, "all samples out");
    check(out_tag.id == read_id_t'(id) && out_tag.save, "tag");
    check(t1 - N <= 8, $sformatf("pass 3 start latency %0d", t1 - N));
    rd_avail = 1'b0;
    repeat (3) @(negedge clk);
  endtask

  initial begin
    int x[];
    int cyc;
    rd_avail = 1'b0; rd_tag = '0; out_ready = 1'b0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 6; t++) begin
      make_levels(N, 300 + 20 * t, 700 - 10 * t, x);
      // spikes that the outlier filter must clip
      for (int s = 0; s < 4; s++) x[$urandom_range(N - 1)] = (s % 2 == 1) ? 1023 : 0;
      one_query(x, t);
    end
    // flat signal: MAD = 0 gives zeros
    x = new[N];
    foreach (x[k]) x[k] = 512;
    one_query(x, 99);
    check(clipped > 0, "outlier filter exercised");
    // the statistics passes take about 2 N cycles plus the division
    make_levels(N, 100, 900, x);
    foreach (x[k]) bank[k] = x[k];
    out_ready = 1'b1;
    @(negedge clk);
    rd_avail = 1'b1;
    cyc = 0;
    while (!out_valid && cyc < 10 * N) begin
      @(negedge clk);
      cyc++;
    end
    check(cyc >= 2 * N && cyc <= 2 * N + 80, $sformatf("first output after %0d cycles", cyc));
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
