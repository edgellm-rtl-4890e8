// axi_wr_dma -- AXI4 write master that stores a stream to a linear region.
//
// Used for the two write paths of the accelerator: output features to DDR
// (T_out*16-bit beats) and the dedicated path that copies freshly generated
// K/V cache rows into HBM (256-bit beats), so that the attention products
// later read the cache at HBM bandwidth.
//
// On a start pulse the engine writes nbeats beats taken from the input stream
// to addr (aligned to a full burst, MAXBURST*DW/8 bytes), in INCR bursts of up
// to MAXBURST beats. Each burst's address is issued first, then its data beats
// with WLAST on the last one; write responses are counted and busy falls, with
// a one-cycle done pulse, when the last response has arrived.
//
// The write paths follow the architecture; burst size, ordering and this
// interface are this design's choices.
module axi_wr_dma #(
  parameter int unsigned DW       = 256,
  parameter int unsigned AW       = 33,
  parameter int unsigned MAXBURST = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [AW-1:0] addr,
  input  logic [31:0]   nbeats,
  output logic          busy,
  output logic          done,
  // input stream
  input  logic          ivalid,
  output logic          iready,
  input  logic [DW-1:0] idata,
  // AXI4 write address / data / response channels
  output logic          awvalid,
  input  logic          awready,
  output logic [AW-1:0] awaddr,
  output logic [7:0]    awlen,
  output logic [2:0]    awsize,
  output logic [1:0]    awburst,
  output logic          wvalid,
  input  logic          wready,
  output logic [DW-1:0] wdata,
  output logic [DW/8-1:0] wstrb,
  output logic          wlast,
  input  logic          bvalid,
  output logic          bready,
  input  logic [1:0]    bresp
);
  localparam int unsigned BYTES = DW / 8;

  typedef enum logic [1:0] {S_IDLE, S_ADDR, S_DATA, S_RESP} state_e;
  state_e state;

  logic [31:0] left, b_left;
  logic [7:0]  beat, len_q;

  assign awsize  = 3'($clog2(BYTES));
  assign awburst = 2'b01;
  assign awlen   = len_q;
  assign awvalid = (state == S_ADDR);
  assign wvalid  = (state == S_DATA) && ivalid;
  assign iready  = (state == S_DATA) && wready;
  assign wdata   = idata;
  assign wstrb   = '1;
  assign wlast   = (beat == len_q);
  assign bready  = 1'b1;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE; busy <= 1'b0; done <= 1'b0; left <= '0; b_left <= '0;
      beat <= '0; len_q <= '0; awaddr <= '0;
    end else begin
      done <= 1'b0;
      if (bvalid) begin
        b_left <= b_left - 1;
        assert (bresp == 2'b00) else $error("axi_wr_dma: error response");
      end
      case (state)
        S_IDLE: if (start) begin
          if (nbeats == 0) done <= 1'b1;
          else begin
            busy   <= 1'b1;
            left   <= nbeats;
            b_left <= (nbeats + MAXBURST - 1) / MAXBURST;
            awaddr <= addr;
            len_q  <= (nbeats >= MAXBURST) ? 8'(MAXBURST - 1) : 8'(nbeats - 1);
            state  <= S_ADDR;
          end
        end
        S_ADDR: if (awready) begin beat <= '0; state <= S_DATA; end
        S_DATA: if (wvalid && wready) begin
          beat <= beat + 1'b1;
          if (wlast) begin
            left   <= left - (32'(len_q) + 1);
            awaddr <= awaddr + AW'((32'(len_q) + 1) * BYTES);
            if (left == 32'(len_q) + 1) state <= S_RESP;
            else begin
              len_q <= (left - (32'(len_q) + 1) >= MAXBURST) ? 8'(MAXBURST - 1)
                                                             : 8'(left - (32'(len_q) + 1) - 1);
              state <= S_ADDR;
            end
          end
        end
        S_RESP: if (b_left == 0 || (b_left == 1 && bvalid)) begin
          busy <= 1'b0; done <= 1'b1; state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
