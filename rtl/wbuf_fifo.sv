// wbuf_fifo -- one port of the on-chip weight buffer: a dual-clock FIFO that
// carries 256-bit HBM beats from the fast memory clock domain (280 MHz in the
// reference system) into the compute clock domain (140 MHz).
//
// The compute side runs at half the rate of the memory side, so it may take
// one or two beats per cycle: rdata0 is the oldest beat, rdata1 the next one,
// rcount says how many beats are surely present, and pop (0, 1 or 2) removes
// that many at the clock edge. Pointers cross the domains in Gray code through
// two-flop synchronisers; rcount and wready are therefore conservative by up
// to the synchroniser delay but never wrong.
//
// The buffer's position between the read DMA and the array and the two clock
// domains follow the architecture; the FIFO form, its depth and the
// double-pop read port are this design's choices. Resets are active low and
// synchronous to their own clocks; both must be applied together.
module wbuf_fifo #(
  parameter int unsigned DW    = 256,
  parameter int unsigned DEPTH = 128     // entries, power of two
) (
  input  logic          wclk,
  input  logic          wrst_n,
  input  logic          wvalid,
  output logic          wready,
  input  logic [DW-1:0] wdata,

  input  logic          rclk,
  input  logic          rrst_n,
  output logic [$clog2(DEPTH):0] rcount,
  output logic [DW-1:0] rdata0,
  output logic [DW-1:0] rdata1,
  input  logic [1:0]    pop
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [DW-1:0] mem [DEPTH];

  logic [AW:0] wbin, wgray, rbin, rgray;
  logic [AW:0] rgray_w1, rgray_w2, wgray_r1, wgray_r2;

  function automatic logic [AW:0] g2b(input logic [AW:0] g);
    logic [AW:0] b;
    b[AW] = g[AW];
    for (int i = AW - 1; i >= 0; i--) b[i] = b[i+1] ^ g[i];
    return b;
  endfunction

  // write side
  logic [AW:0] rbin_w;
  assign rbin_w = g2b(rgray_w2);
  assign wready = (wbin - rbin_w) < (AW+1)'(DEPTH);

  always_ff @(posedge wclk) begin
    if (!wrst_n) begin
      wbin <= '0; wgray <= '0; rgray_w1 <= '0; rgray_w2 <= '0;
    end else begin
      rgray_w1 <= rgray; rgray_w2 <= rgray_w1;
      if (wvalid && wready) begin
        wbin  <= wbin + 1'b1;
        wgray <= (wbin + 1'b1) ^ ((wbin + 1'b1) >> 1);
      end
    end
  end
  always_ff @(posedge wclk)
    if (wvalid && wready) mem[wbin[AW-1:0]] <= wdata;

  // read side
  logic [AW:0] wbin_r, rnext;
  assign wbin_r = g2b(wgray_r2);
  assign rcount = wbin_r - rbin;
  assign rdata0 = mem[rbin[AW-1:0]];
  assign rdata1 = mem[AW'(rbin[AW-1:0] + 1'b1)];
  assign rnext  = rbin + (AW+1)'(pop);

  always_ff @(posedge rclk) begin
    if (!rrst_n) begin
      rbin <= '0; rgray <= '0; wgray_r1 <= '0; wgray_r2 <= '0;
    end else begin
      wgray_r1 <= wgray; wgray_r2 <= wgray_r1;
      rbin  <= rnext;
      rgray <= rnext ^ (rnext >> 1);
    end
  end

  always_ff @(posedge rclk)
    if (rrst_n) assert (pop != 2'd3 && (AW+1)'(pop) <= rcount)
      else $error("wbuf_fifo: pop %0d with %0d beats", pop, rcount);

endmodule
