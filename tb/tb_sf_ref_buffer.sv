// tb_sf_ref_buffer: self-checking testbench of the reference buffer.
//
// Fills the buffer at its full default depth (102400 samples) with a
// position-dependent pattern, streams it back one sample per cycle with the
// one-cycle read latency, rewrites a few addresses and checks that read
// data holds while the read enable is low.
module tb_sf_ref_buffer;
  import sf_pkg::*;

  localparam int D = DEF_REF_DEPTH;
  localparam int AW = $clog2(D);
  logic clk = 1'b0;
  logic we, re;
  logic [AW-1:0] waddr, raddr;
  samp_t wdata, rdata;
  int checks = 0, failures = 0;

  always #5 clk = !clk;

  sf_ref_buffer dut (.clk(clk), .we(we), .waddr(waddr), .wdata(wdata), .re(re), .raddr(raddr), .rdata(rdata));

  function automatic samp_t pat(int a, int salt);
    return samp_t'((a * 37 + (a >> 8) * 11 + salt) & 255);
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    we = 1'b0; re = 1'b0; waddr = '0; raddr = '0; wdata = '0;
    for (int a = 0; a < D; a++) begin
      @(negedge clk);
      we = 1'b1; waddr = AW'(a); wdata = pat(a, 0);
    end
    @(negedge clk);
    we = 1'b0;
    for (int a = 0; a < D; a++) begin
      re = 1'b1; raddr = AW'(a);
      @(negedge clk);
      check(rdata == pat(a, 0), $sformatf("addr %0d", a));
    end
    re = 1'b0;
    raddr = '0;
    @(negedge clk);
    check(rdata == pat(D - 1, 0), "read data holds without re");
    for (int a = 0; a < D; a += 4099) begin
      we = 1'b1; waddr = AW'(a); wdata = pat(a, 5);
      @(negedge clk);
    end
    we = 1'b0;
    for (int a = 0; a < D; a += 4099) begin
      re = 1'b1; raddr = AW'(a);
      @(negedge clk);
      check(rdata == pat(a, 5), $sformatf("rewritten addr %0d", a));
      re = 1'b1; raddr = AW'(a + 1);
      @(negedge clk);
      check(rdata == pat(a + 1, 0), $sformatf("neighbour addr %0d", a + 1));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
