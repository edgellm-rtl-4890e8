// tb_wbuf_fifo -- self-checking test of the dual-clock weight FIFO.
//
// Writes a numbered sequence of beats on a 3.5 ns clock with random gaps and
// pops 0, 1 or 2 beats per cycle on an unrelated 7.1 ns clock, never more than
// rcount. Checks that every beat arrives once, in order, on rdata0/rdata1,
// that the FIFO really fills (wready low seen) and that double pops happen.
module tb_wbuf_fifo;
  timeunit 1ns; timeprecision 1ps;
  localparam int DW = 256, DEPTH = 16, N = 3000;
  logic wclk = 0, rclk = 0, wrst_n = 0, rrst_n = 0;
  always #1.75 wclk = ~wclk;
  always #3.55 rclk = ~rclk;

  logic wvalid, wready; logic [DW-1:0] wdata;
  logic [$clog2(DEPTH):0] rcount; logic [DW-1:0] rdata0, rdata1; logic [1:0] pop;
  wbuf_fifo #(.DW(DW), .DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0, nfull = 0, ndouble = 0;
  int wn = 0, rn = 0;
  function automatic logic [DW-1:0] beat(input int n);
    return {8{32'(n) ^ 32'h5a5a0000}};
  endfunction

  initial begin
    #200000; failures++; $display("watchdog wn=%0d rn=%0d rcount=%0d wbin=%0d rbin=%0d", wn, rn, rcount, dut.wbin, dut.rbin);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    wvalid = 0; wdata = '0;
    repeat (4) @(posedge wclk); wrst_n = 1;
    while (wn < N) begin
      bit fire;
      @(negedge wclk);
      wvalid = ($urandom_range(9) != 0); wdata = beat(wn);
      #0.1 fire = wvalid && wready;
      if (!wready) nfull++;
      @(posedge wclk);
      if (fire) wn++;
    end
    @(negedge wclk);
    wvalid = 0;
  end

  initial begin
    pop = 0;
    repeat (4) @(posedge rclk); rrst_n = 1;
    while (rn < N) begin
      int p;
      @(negedge rclk);
      p = (rn < 1500) ? $urandom_range(1) : $urandom_range(2);   // slow reader first
      if (p > int'(rcount)) p = int'(rcount);
      pop = 2'(p);
      if (p >= 1) begin checks++; if (rdata0 !== beat(rn))   begin failures++; $display("FAIL beat %0d", rn); end end
      if (p == 2) begin checks++; if (rdata1 !== beat(rn+1)) begin failures++; $display("FAIL beat %0d", rn+1); end ndouble++; end
      rn += p;
      @(posedge rclk); #0.1 pop = 0;
    end
    repeat (5) @(posedge rclk);
    checks += 3;
    if (rcount != 0) failures++;
    if (nfull == 0) begin failures++; $display("FAIL: never full"); end
    if (ndouble == 0) begin failures++; $display("FAIL: no double pop"); end
    $display("full cycles %0d double pops %0d", nfull, ndouble);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
