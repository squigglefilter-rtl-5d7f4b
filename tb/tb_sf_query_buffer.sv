// tb_sf_query_buffer: self-checking testbench of the ping-pong query buffer.
//
// Writes random queries (with random gaps) while a reader reads and releases
// full banks at random moments; checks that every query comes back intact and
// in order with its tag, that the writer is held off only while both banks are
// full, and that loading into one bank overlaps reading of the other.
module tb_sf_query_buffer;
  import sf_pkg::*;

  localparam int D = 16;
  localparam int NQ = 40;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic wr_valid, wr_ready, rd_avail, rd_release;
  raw_t wr_data, rd_data;
  rtag_t wr_tag, rd_tag;
  logic [$clog2(D)-1:0] rd_addr;
  int checks = 0, failures = 0, overlap = 0, full_stall = 0;
  raw_t data [NQ][D];

  always #5 clk = !clk;

  sf_query_buffer #(.DEPTH(D)) dut (
    .clk(clk), .rst_n(rst_n), .wr_valid(wr_valid), .wr_ready(wr_ready), .wr_data(wr_data),
    .wr_tag(wr_tag), .rd_avail(rd_avail), .rd_tag(rd_tag), .rd_addr(rd_addr),
    .rd_data(rd_data), .rd_release(rd_release)
  );

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    foreach (data[a, b]) data[a][b] = raw_t'($urandom);
  end

  // writer
  initial begin
    wr_valid = 1'b0; wr_data = '0; wr_tag = '0;
    @(posedge rst_n);
    for (int qn = 0; qn < NQ; qn++) begin
      for (int k = 0; k < D; k++) begin
        @(negedge clk);
        while ($urandom_range(4) == 0) @(negedge clk);
        wr_valid = 1'b1;
        wr_data  = data[qn][k];
        wr_tag   = '{id: read_id_t'(qn), cont: qn[0], save: qn[1]};
        @(posedge clk);
        while (!wr_ready) begin
          full_stall++;
          @(posedge clk);
        end
        #1 wr_valid = 1'b0;
      end
    end
  end

  // reader
  initial begin
    rd_addr = '0; rd_release = 1'b0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int qn = 0; qn < NQ; qn++) begin
      @(negedge clk);
      while (!rd_avail) @(negedge clk);
      check(rd_tag.id == read_id_t'(qn) && rd_tag.cont == qn[0] && rd_tag.save == qn[1], "tag");
      if (qn > 4) repeat (int'($urandom_range(3 * D))) @(negedge clk);
      for (int k = 0; k < D; k++) begin
        rd_addr = ($clog2(D))'(k);
        @(negedge clk);
        if (wr_valid) overlap++;
        check(rd_data == data[qn][k], $sformatf("query %0d sample %0d", qn, k));
      end
      rd_release = 1'b1;
      @(negedge clk);
      rd_release = 1'b0;
    end
    check(overlap > 0, "loading overlaps reading");
    check(full_stall > 0, "writer held off when both banks are full");
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
