// out_acc -- output unit: accumulation of PE results and output row FIFO.
//
// A PE result covers TIN stored weights of each of the NPE output channels.
// This unit adds the nsteps successive results of each channel in FP16
// (edgellm_pkg::fp16_add: align, add, truncate) and, after the last one,
// pushes the NPE sums as one output row of NPE*16 bits - a T_out-wide beat of
// the [CH/T_out, token, T_out] layout - into a FIFO of DEPTH rows that feeds
// the DDR write DMA. afull tells the sequencer to hold off new output blocks
// while 8 or fewer rows are free.
//
// The paper names the output stage but not its arithmetic; FP16 accumulation
// in arrival order is this design's choice. clear resets the step count and
// empties the FIFO at the start of an operation.
module out_acc
  import edgellm_pkg::*;
#(
  parameter int unsigned NPE   = 32,
  parameter int unsigned DEPTH = 32
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear,
  input  logic [15:0]          nsteps,     // results per output row, >= 1
  input  logic                 in_valid,
  input  logic [NPE-1:0][15:0] in_res,
  output logic                 afull,
  output logic                 ovalid,
  input  logic                 oready,
  output logic [NPE*16-1:0]    odata
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [NPE-1:0][15:0] acc;
  logic [15:0]          cnt;
  logic [NPE*16-1:0]    fifo [DEPTH];
  logic [AW:0]          wp, rp;
  logic                 push;
  logic [NPE*16-1:0]    row;

  always_comb begin
    for (int p = 0; p < NPE; p++)
      row[16*p +: 16] = (cnt == 0) ? in_res[p] : fp16_add(acc[p], in_res[p]);
  end
  assign push = in_valid && (cnt == nsteps - 1);

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      cnt <= '0; wp <= '0; rp <= '0;
    end else begin
      if (in_valid) begin
        cnt <= push ? '0 : cnt + 1'b1;
        for (int p = 0; p < NPE; p++) acc[p] <= row[16*p +: 16];
      end
      if (push) begin
        fifo[wp[AW-1:0]] <= row;
        wp <= wp + 1'b1;
      end
      if (ovalid && oready) rp <= rp + 1'b1;
    end
  end

  assign ovalid = (wp != rp);
  assign odata  = fifo[rp[AW-1:0]];
  assign afull  = (wp - rp) >= (AW+1)'(DEPTH - 8);

  always_ff @(posedge clk)
    if (rst_n && !clear) assert (!(push && (wp - rp) == (AW+1)'(DEPTH))) else $error("out_acc: overflow");

endmodule
