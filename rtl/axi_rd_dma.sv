// axi_rd_dma -- AXI4 read master that streams a linear memory region.
//
// Used for every read path of the accelerator: one instance per HBM port
// fetching weight packages or K/V cache rows (256-bit beats, memory clock),
// and on the DDR side for feature maps (T_out*16 = 512-bit beats). Because
// every tensor is kept in the [CH/T_out, token, T_out] layout, an operand is
// one contiguous address range and the incrementing AXI burst walks exactly
// the token (or width) dimension.
//
// On a start pulse the engine reads nbeats beats from addr (which must be
// aligned to a full burst, MAXBURST*DW/8 bytes, so no burst crosses a 4 KB
// boundary), in INCR bursts of up to MAXBURST beats with up to MAXOUT bursts
// outstanding. Read data goes out on a valid/ready stream in order; the R
// channel is throttled by the stream's ready. busy is high from start until
// the last beat has been handed on; done pulses once then.
//
// The read DMA and its role follow the architecture; burst length, the
// number of outstanding bursts and this interface are this design's choices.
module axi_rd_dma #(
  parameter int unsigned DW       = 256,
  parameter int unsigned AW       = 33,
  parameter int unsigned MAXBURST = 16,
  parameter int unsigned MAXOUT   = 4
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [AW-1:0] addr,
  input  logic [31:0]   nbeats,
  output logic          busy,
  output logic          done,
  // AXI4 read address / data channels
  output logic          arvalid,
  input  logic          arready,
  output logic [AW-1:0] araddr,
  output logic [7:0]    arlen,
  output logic [2:0]    arsize,
  output logic [1:0]    arburst,
  input  logic          rvalid,
  output logic          rready,
  input  logic [DW-1:0] rdata,
  input  logic          rlast,
  input  logic [1:0]    rresp,
  // output stream
  output logic          ovalid,
  input  logic          oready,
  output logic [DW-1:0] odata
);
  localparam int unsigned BYTES = DW / 8;

  logic [31:0] ar_left, r_left;
  logic [$clog2(MAXOUT+1)-1:0] outst;
  logic [7:0]  len_c;

  assign len_c   = (ar_left >= MAXBURST) ? 8'(MAXBURST - 1) : 8'(ar_left - 1);
  assign arlen   = len_c;
  assign arsize  = 3'($clog2(BYTES));
  assign arburst = 2'b01;
  assign arvalid = busy && (ar_left != 0) && (32'(outst) < MAXOUT);

  assign ovalid = rvalid && busy;
  assign odata  = rdata;
  assign rready = oready && busy;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; ar_left <= '0; r_left <= '0; outst <= '0; araddr <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy    <= (nbeats != 0);
        done    <= (nbeats == 0);
        ar_left <= nbeats;
        r_left  <= nbeats;
        araddr  <= addr;
      end else begin
        if (arvalid && arready) begin
          ar_left <= ar_left - (32'(len_c) + 1);
          araddr  <= araddr + AW'((32'(len_c) + 1) * BYTES);
        end
        if (rvalid && rready) begin
          r_left <= r_left - 1;
          if (r_left == 1) begin busy <= 1'b0; done <= 1'b1; end
        end
        outst <= outst + $bits(outst)'(arvalid && arready) - $bits(outst)'(rvalid && rready && rlast);
      end
    end
  end

  always_ff @(posedge clk)
    if (rst_n && rvalid && rready) assert (rresp == 2'b00) else $error("axi_rd_dma: error response");

endmodule
