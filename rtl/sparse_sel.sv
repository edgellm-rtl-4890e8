// sparse_sel -- activation selector of the sparse controller (one per PE).
//
// A log-scale structured-sparse layer keeps, in every group of 8 adjacent
// input channels, at most 8/R non-zero weights, R = 1, 2, 4 or 8 (dense, 50%,
// 75%, 87.5% sparsity). Only the non-zero weights are stored, TIN per PE step,
// so one step covers TIN*R input channels. This block takes that window of
// TIN*R activations and returns, for each stored weight, the activation of its
// input channel. Output lane j serves group g = j / (8/R), and is the k-th
// non-zero of that group, k = j mod (8/R).
//
// Two position encodings are accepted, as the weight package defines:
//   ENC_ONEHOT  one mask bit per input channel of the window (TIN*R bits);
//               lane j takes the channel of the k-th set bit of its group,
//               or zero if the group has fewer set bits;
//   ENC_ADDR    one 3-bit offset inside the group per stored weight (3*TIN
//               bits); lane j takes channel 8g + addr[j].
// With R = 1 the masks are ignored and lane j takes channel j.
//
// The group of 8, the per-lane ordering and the 3-bit offset width are this
// design's choices; the paper fixes the log-scale ratios and the two encodings.
// Purely combinational; window channels above TIN*R are ignored.
module sparse_sel
  import edgellm_pkg::*;
#(
  parameter int unsigned TIN  = 128,
  parameter int unsigned MAXR = 8
) (
  input  logic [1:0]             log2r,      // R = 2**log2r
  input  mask_enc_e              enc,
  input  logic [TIN*MAXR*16-1:0] win,        // channel c at win[16c +: 16]
  input  logic [TIN*MAXR-1:0]    mask_oh,    // bit c: channel c has a weight
  input  logic [TIN*3-1:0]       mask_addr,  // offset of stored weight j
  output logic [TIN*16-1:0]      sel
);
  localparam int unsigned GS = 8;

  initial assert (MAXR == 8 && TIN % GS == 0) else $error("sparse_sel expects MAXR = 8");

  always_comb begin
    int nnz;
    nnz = GS >> log2r;
    for (int j = 0; j < TIN; j++) begin
      int g, k, cnt;
      logic [15:0] v;
      g = j / nnz;
      k = j % nnz;
      cnt = 0;
      v = '0;
      if (log2r == 2'd0) begin
        v = win[16*j +: 16];
      end else if (enc == ENC_ADDR) begin
        v = win[16*(GS*g + int'(mask_addr[3*j +: 3])) +: 16];
      end else begin
        for (int b = 0; b < GS; b++) begin
          if (mask_oh[GS*g + b]) begin
            if (cnt == k) v = win[16*(GS*g + b) +: 16];
            cnt++;
          end
        end
      end
      sel[16*j +: 16] = v;
    end
  end

endmodule
