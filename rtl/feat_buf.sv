// feat_buf -- on-chip feature buffer.
//
// Holds activations as rows of TIN FP16 values (TIN consecutive channels of
// one token). Rows are spread over 8 banks by the low three bits of the row
// number, so one read returns the 8 consecutive rows starting at any row r:
// that is the window of up to 8*TIN channels from which the sparse controller
// picks the activations of the stored non-zero weights (R = 8 at 87.5%
// sparsity). Output row k is row r+k.
//
// Writes arrive from the DDR read DMA one DDR beat (QW bits, a quarter of a
// row at the default sizes) at a time: wr_row selects the row, wr_q the
// beat inside it. Reads are synchronous: rd_data is valid the cycle after
// rd_en. Rows past ROWS wrap. The banking and the beat-wise write port are
// this design's choices; the paper shows only the buffer itself.
module feat_buf #(
  parameter int unsigned TIN  = 128,
  parameter int unsigned QW   = 512,     // write beat width (DDR beat)
  parameter int unsigned ROWS = 128      // total rows, multiple of 8
) (
  input  logic                    clk,
  input  logic                    wr_en,
  input  logic [$clog2(ROWS)-1:0] wr_row,
  input  logic [$clog2(TIN*16/QW > 1 ? TIN*16/QW : 2)-1:0] wr_q,
  input  logic [QW-1:0]           wr_data,
  input  logic                    rd_en,
  input  logic [$clog2(ROWS)-1:0] rd_row,
  output logic [8*TIN*16-1:0]     rd_data
);
  localparam int unsigned NB = 8;
  localparam int unsigned Q  = TIN * 16 / QW;
  localparam int unsigned BA = $clog2(ROWS / NB);
  localparam int unsigned RA = $clog2(ROWS);

  initial assert (Q >= 1 && Q * QW == TIN * 16 && ROWS % NB == 0)
    else $error("feat_buf: bad sizes");

  logic [TIN*16-1:0] mem [NB][ROWS/NB];
  logic [TIN*16-1:0] q_bank [NB];
  logic [2:0]        rot_q;

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_row[2:0]][wr_row[RA-1:3]][QW*wr_q +: QW] <= wr_data;
    if (rd_en) begin
      for (int b = 0; b < NB; b++) begin
        logic [2:0]    d;
        logic [RA-1:0] r;
        d = 3'(b - int'(rd_row[2:0]));   // unsigned bank distance 0..7
        r = rd_row + RA'(d);
        q_bank[b] <= mem[b][r[RA-1:3]];
      end
      rot_q <= rd_row[2:0];
    end
  end

  always_comb
    for (int k = 0; k < NB; k++) rd_data[k*TIN*16 +: TIN*16] = q_bank[3'(int'(rot_q) + k)];

endmodule
