// tb_axi_wr_dma -- self-checking test of the AXI4 write DMA.
//
// Streams numbered beats, with random gaps, into the DMA for several lengths
// and addresses; a behavioural AXI memory with random ready delays stores
// them. After each done pulse the memory must hold exactly the stream at the
// target words, and the words just outside the range must be untouched.
module tb_axi_wr_dma;
  timeunit 1ns; timeprecision 1ps;
  localparam int DW = 256, AW = 33;
  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;

  logic start, busy, done; logic [AW-1:0] addr; logic [31:0] nbeats;
  logic ivalid, iready; logic [DW-1:0] idata;
  logic awvalid, awready, wvalid, wready, wlast, bvalid, bready;
  logic [AW-1:0] awaddr; logic [7:0] awlen; logic [2:0] awsize; logic [1:0] awburst, bresp;
  logic [DW-1:0] wdata; logic [DW/8-1:0] wstrb;
  logic arvalid = 0, arready, rvalid, rready = 0, rlast; logic [AW-1:0] araddr = '0;
  logic [7:0] arlen = '0; logic [DW-1:0] rdata; logic [1:0] rresp;

  axi_wr_dma #(.DW(DW), .AW(AW)) dut (.*);
  axi_mem_model #(.DW(DW), .AW(AW), .WORDS(1024)) mem (.*);

  int checks = 0, failures = 0, ndone = 0;
  initial begin
    #400000; failures++; $display("watchdog state=%0d left=%0d bleft=%0d nb=%0d wq=%0d ndone=%0d beat=%0d wready=%0d ivalid=%0d wbeat=%0d", dut.state, dut.left, dut.b_left, mem.nb, mem.wq_addr.size(), ndone, dut.beat, wready, ivalid, mem.wbeat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(posedge clk) if (rst_n && done) ndone++;

  // synchronous stream source: beat n of transfer t carries t*1000 + n
  int sent = 0, cur_t = 0, cur_len = 0;
  bit go = 0;
  always @(posedge clk) begin
    if (!go) begin
      sent <= 0; ivalid <= 1'b0;
    end else begin
      int nxt;
      nxt = sent + ((ivalid && iready) ? 1 : 0);
      sent <= nxt;
      if (!ivalid || iready) begin
        ivalid <= (nxt < cur_len) && ($urandom_range(3) != 0);
        idata  <= {8{32'(cur_t * 1000 + nxt)}};
      end
    end
  end

  initial begin
    int lens[4] = '{1, 5, 32, 70};
    int bases[4] = '{16, 64, 160, 400};
    start = 0; addr = '0; nbeats = 0; idata = '0;
    for (int i = 0; i < 1024; i++) mem.mem[i] = '1;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 4; t++) begin
      @(negedge clk);
      addr = AW'(bases[t] * 32); nbeats = lens[t]; start = 1;
      cur_t = t; cur_len = lens[t]; go = 1;
      @(negedge clk); start = 0;
      while (ndone != t + 1) @(negedge clk);
      for (int i = -1; i <= lens[t]; i++) begin
        checks++;
        if (i < 0 || i == lens[t]) begin
          if (mem.mem[bases[t] + i] !== '1) begin failures++; $display("FAIL overwrite t=%0d i=%0d", t, i); end
        end else if (mem.mem[bases[t] + i] !== {8{32'(t * 1000 + i)}}) begin
          failures++; $display("FAIL t=%0d word %0d", t, i);
        end
      end
      go = 0;
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
