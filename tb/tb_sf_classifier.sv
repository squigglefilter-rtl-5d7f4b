// tb_sf_classifier: self-checking testbench of the last-PE decision logic.
//
// Feeds random last-row cost sequences (with idle cycles between them) and
// checks the minimum, the eject decision against a threshold, and that done
// rises exactly when ref_len costs have been seen.
module tb_sf_classifier;
  import sf_pkg::*;

  localparam int DEPTH = 64;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic start, cost_v, is_virus, done, eject;
  logic [$clog2(DEPTH+1)-1:0] ref_len;
  cost_t threshold, cost, min_cost;
  int checks = 0, failures = 0, ejects = 0, keeps = 0;

  always #5 clk = !clk;

  sf_classifier #(.REF_DEPTH(DEPTH)) dut (
    .clk(clk), .rst_n(rst_n), .start(start), .ref_len(ref_len), .threshold(threshold),
    .cost_v(cost_v), .cost(cost), .is_virus(is_virus), .done(done), .eject(eject),
    .min_cost(min_cost)
  );

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    int len, mn, v, sent, base;
    start = 1'b0; cost_v = 1'b0; cost = '0; threshold = '0; ref_len = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 60; t++) begin
      len = 1 + int'($urandom_range(DEPTH - 1));
      ref_len = ($clog2(DEPTH+1))'(len);
      threshold = cost_t'(int'($urandom_range(2000)) - 1000);
      base = int'($urandom_range(2000)) - 1000;
      @(negedge clk);
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      mn = 32'h7fffffff;
      sent = 0;
      while (sent < len) begin
        cost_v = ($urandom_range(3) != 0);
        if (cost_v) begin
          v = base + int'($urandom_range(400));
          cost = cost_t'(v);
          if (v < mn) mn = v;
          sent++;
        end
        @(negedge clk);
        check(done == (sent == len), "done timing");
      end
      cost_v = 1'b0;
      // an extra cost after done must be ignored
      cost = cost_t'(-5000);
      cost_v = 1'b1;
      @(negedge clk);
      cost_v = 1'b0;
      check(int'(min_cost) == mn, $sformatf("min %0d != %0d", min_cost, mn));
      check(eject == (mn > int'(threshold)), "eject decision");
      if (eject) ejects++; else keeps++;
    end
    check(ejects > 5 && keeps > 5, "both decisions seen");
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
