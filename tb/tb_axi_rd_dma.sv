// tb_axi_rd_dma -- self-checking test of the AXI4 read DMA.
//
// A behavioural AXI memory with random handshake delays holds a known
// pattern. The DMA is started for several lengths (one beat, a partial burst,
// many bursts) and the output stream, throttled at random, must deliver
// exactly the requested words in order, followed by one done pulse.
module tb_axi_rd_dma;
  timeunit 1ns; timeprecision 1ps;
  localparam int DW = 256, AW = 33;
  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;

  logic start, busy, done; logic [AW-1:0] addr; logic [31:0] nbeats;
  logic arvalid, arready, rvalid, rready, rlast; logic [AW-1:0] araddr; logic [7:0] arlen;
  logic [2:0] arsize; logic [1:0] arburst, rresp; logic [DW-1:0] rdata;
  logic ovalid, oready; logic [DW-1:0] odata;
  logic awvalid = 0, awready, wvalid = 0, wready, wlast = 0, bvalid, bready = 1;
  logic [AW-1:0] awaddr = '0; logic [7:0] awlen = '0; logic [DW-1:0] wdata = '0; logic [1:0] bresp;

  axi_rd_dma #(.DW(DW), .AW(AW)) dut (.*);
  axi_mem_model #(.DW(DW), .AW(AW), .WORDS(1024)) mem (.*);

  int checks = 0, failures = 0, ndone = 0, got = 0;
  initial begin
    #400000; failures++; $display("watchdog busy=%0d outst=%0d arleft=%0d rleft=%0d q=%0d rvalid=%0d", dut.busy, dut.outst, dut.ar_left, dut.r_left, mem.rq_addr.size(), rvalid);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(posedge clk) if (rst_n && done) ndone++;

  initial begin
    int lens[4] = '{1, 7, 16, 133};
    int bases[4] = '{0, 64, 128, 512};
    start = 0; addr = '0; nbeats = 0; oready = 0;
    for (int i = 0; i < 1024; i++) mem.mem[i] = {8{32'(i * 7919)}};
    repeat (3) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 4; t++) begin
      int base_w = bases[t];
      @(negedge clk);
      addr = AW'(base_w * 32); nbeats = lens[t]; start = 1;
      @(negedge clk); start = 0;
      got = 0;
      while (got < lens[t]) begin
        oready = ($urandom_range(3) != 0);
        #0.5;
        if (ovalid && oready) begin
          checks++;
          if (odata !== {8{32'((base_w + got) * 7919)}}) begin failures++; $display("FAIL t=%0d beat %0d", t, got); end
          got++;
        end
        @(negedge clk);
      end
      oready = 0;
      repeat (3) @(negedge clk);
      checks += 2;
      if (busy) failures++;
      if (ndone != t + 1) begin failures++; $display("FAIL done count %0d", ndone); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
