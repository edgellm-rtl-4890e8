// axi_mem_model -- behavioural AXI4 memory slave for the testbenches.
//
// Stands in for an HBM pseudo-channel or the DDR controller. Accepts INCR
// bursts on AR and AW with random ready delays, returns read beats in order
// with random gaps (if JITTER), stores write beats and answers OKAY. The
// contents are a plain array of WORDS words of DW bits, indexed by
// address / (DW/8) modulo WORDS, that the testbench may read and write.
module axi_mem_model #(
  parameter int unsigned DW     = 256,
  parameter int unsigned AW     = 33,
  parameter int unsigned WORDS  = 4096,
  parameter bit          JITTER = 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          arvalid,
  output logic          arready,
  input  logic [AW-1:0] araddr,
  input  logic [7:0]    arlen,
  output logic          rvalid,
  input  logic          rready,
  output logic [DW-1:0] rdata,
  output logic          rlast,
  output logic [1:0]    rresp,
  input  logic          awvalid,
  output logic          awready,
  input  logic [AW-1:0] awaddr,
  input  logic [7:0]    awlen,
  input  logic          wvalid,
  output logic          wready,
  input  logic [DW-1:0] wdata,
  input  logic          wlast,
  output logic          bvalid,
  input  logic          bready,
  output logic [1:0]    bresp
);
  logic [DW-1:0] mem [WORDS];
  int unsigned rq_addr[$], rq_len[$], wq_addr[$], wq_len[$];
  int unsigned rbeat = 0, wbeat = 0, nb = 0;
  int unsigned reads = 0, writes = 0;

  function automatic int unsigned widx(input logic [AW-1:0] a);
    return int'((a / (DW / 8)) % WORDS);
  endfunction

  assign rresp = 2'b00;
  assign bresp = 2'b00;

  always @(posedge clk) begin
    if (!rst_n) begin
      arready <= 0; awready <= 0; rvalid <= 0; rlast <= 0; rdata <= '0; wready <= 0; bvalid <= 0;
      rq_addr.delete(); rq_len.delete(); wq_addr.delete(); wq_len.delete();
      rbeat <= 0; wbeat <= 0; nb <= 0;
    end else begin
      if (arvalid && arready) begin rq_addr.push_back(widx(araddr)); rq_len.push_back(arlen); end
      if (awvalid && awready) begin wq_addr.push_back(widx(awaddr)); wq_len.push_back(awlen); end
      arready <= JITTER ? ($urandom_range(3) != 0) : 1'b1;
      awready <= JITTER ? ($urandom_range(3) != 0) : 1'b1;
      // read data
      if (rvalid && rready) begin
        reads++;
        if (rbeat == rq_len[0]) begin
          void'(rq_addr.pop_front()); void'(rq_len.pop_front()); rbeat = 0;
        end else rbeat = rbeat + 1;
      end
      if (!(rvalid && !rready)) begin
        if ((rq_addr.size() > 0) && (!JITTER || $urandom_range(4) != 0)) begin
          rvalid <= 1'b1;
          rdata  <= mem[(rq_addr[0] + rbeat) % WORDS];
          rlast  <= (rbeat == rq_len[0]);
        end else begin
          rvalid <= 1'b0;
          rlast  <= 1'b0;
        end
      end
      // write data
      if (wvalid && wready) begin
        mem[(wq_addr[0] + wbeat) % WORDS] = wdata;
        writes++;
        if (wbeat == wq_len[0]) begin
          assert (wlast) else $error("axi_mem_model: WLAST missing");
          void'(wq_addr.pop_front()); void'(wq_len.pop_front()); wbeat = 0; nb++;
        end else wbeat = wbeat + 1;
      end
      wready <= (wq_addr.size() > 0) && (!JITTER || $urandom_range(3) != 0);
      if (bvalid && bready) nb--;
      bvalid <= (nb > 0);
    end
  end
endmodule
