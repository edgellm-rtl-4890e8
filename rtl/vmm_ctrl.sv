// vmm_ctrl -- buffer controller: sequencer of one matrix-vector product.
//
// The weights of output channel c live in HBM port c mod NPE as a sequence of
// packages, one per 2048 input channels, each made of
//     scale beat  (16 FP16 block scales, 256 bits)
//     mask beats  (none when dense; 8 beats one-hot; 24/R beats of 3-bit
//                  in-group addresses)
//     weight beats (32/R beats of 64 INT4 weights)
// and all NPE ports carry the same layout for their own channels, so the
// controller walks them in lock step. In FP16xFP16 mode the stream is just
// K/V rows, two beats (32 FP16 values) per step.
//
// For every product step the controller takes two weight beats from every
// port (128 INT4 values or 32 FP16 values), reads the matching feature window
// from the feature buffer (R rows of 128 channels for sparsity ratio R, or a
// quarter row in FP16 mode), and one cycle later presents window, per-port
// weights, per-port masks and per-port scales to the sparse controller and
// the array. Scale and mask beats cost one cycle each. If any port's FIFO is
// short, or the output FIFO is nearly full at the start of an output block,
// the controller waits (stall_cycles counts those cycles).
//
// Layout of the package and the one-scale-per-256-bit-beat rule follow the
// paper's weight package; the interpretation that one scale serves 128
// stored (non-zero) weights, the in-package ordering of bits and this
// interface are this design's choices. Feature rows wrap modulo ROWS.
module vmm_ctrl
  import edgellm_pkg::*;
#(
  parameter int unsigned TIN   = 128,
  parameter int unsigned NPE   = 32,
  parameter int unsigned ROWS  = 128,
  parameter int unsigned CW    = 8           // width of FIFO counts
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  pe_mode_e                  mode,
  input  logic [1:0]                log2r,
  input  mask_enc_e                 enc,
  input  logic [15:0]               nstep,     // portions (INT4) or steps (FP16)
  input  logic [15:0]               noblk,     // output blocks of NPE channels
  input  logic [15:0]               scale0,    // scale in FP16xFP16 mode
  input  logic [$clog2(ROWS)-1:0]   feat_row,
  input  logic                      out_afull,
  output logic                      busy,
  output logic                      done,
  output logic [31:0]               stall_cycles,
  // weight FIFOs
  input  logic [NPE-1:0][CW-1:0]    rcount,
  input  logic [NPE-1:0][255:0]     rdata0,
  input  logic [NPE-1:0][255:0]     rdata1,
  output logic [1:0]                pop,
  // feature buffer
  output logic                      fb_rd_en,
  output logic [$clog2(ROWS)-1:0]   fb_rd_row,
  input  logic [8*TIN*16-1:0]       fb_rd_data,
  // to the sparse controller and the array
  output logic                      a_valid,
  output pe_mode_e                  a_mode,
  output logic [1:0]                a_log2r,
  output mask_enc_e                 a_enc,
  output logic [8*TIN*16-1:0]       a_win,
  output logic [NPE-1:0][TIN*8-1:0] a_mask_oh,
  output logic [NPE-1:0][TIN*3-1:0] a_mask_addr,
  output logic [NPE-1:0][TIN*4-1:0] a_wt,
  output logic [NPE-1:0][15:0]      a_scale
);
  localparam int unsigned RA    = $clog2(ROWS);
  localparam int unsigned MASKW = 12 * 256;   // largest mask: 3-bit addresses at R = 2

  initial assert (TIN == 128) else $error("vmm_ctrl: the package layout assumes TIN = 128");

  typedef enum logic [2:0] {S_IDLE, S_SCALE, S_MASK, S_WT, S_KV, S_FIN} state_e;
  state_e state;

  logic [15:0] ob, pi, s;
  logic [3:0]  mb;
  logic [NPE-1:0][255:0]      scale_reg;
  logic [NPE-1:0][MASKW-1:0]  mask_reg;

  logic [3:0] nmask;
  logic [4:0] nwt;
  always_comb begin
    nwt = 5'd16 >> log2r;
    if (log2r == 2'd0)        nmask = 4'd0;
    else if (enc == ENC_ONEHOT) nmask = 4'd8;
    else                      nmask = 4'(24 >> log2r);
  end

  logic have1, have2;
  always_comb begin
    have1 = 1'b1; have2 = 1'b1;
    for (int p = 0; p < NPE; p++) begin
      if (rcount[p] < CW'(1)) have1 = 1'b0;
      if (rcount[p] < CW'(2)) have2 = 1'b0;
    end
  end

  logic blk_start, go_scale, go_mask, go_wt, go_kv;
  assign blk_start = (pi == 0) && (s == 0);
  assign go_scale = (state == S_SCALE) && have1 && !(blk_start && out_afull);
  assign go_mask  = (state == S_MASK)  && have1;
  assign go_wt    = (state == S_WT)    && have2;
  assign go_kv    = (state == S_KV)    && have2 && !(s == 0 && out_afull);

  assign pop       = (go_wt || go_kv) ? 2'd2 : (go_scale || go_mask) ? 2'd1 : 2'd0;
  assign fb_rd_en  = go_wt || go_kv;
  assign fb_rd_row = go_kv ? RA'(feat_row + RA'(s >> 2))
                           : RA'(feat_row + RA'(pi * 16) + RA'(s << log2r));
  assign busy      = (state != S_IDLE);

  // ---------------------------------------------------------------- sequencing
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE; ob <= '0; pi <= '0; s <= '0; mb <= '0; done <= 1'b0; stall_cycles <= '0;
    end else begin
      done <= 1'b0;
      if (state inside {S_SCALE, S_MASK, S_WT, S_KV} && pop == 2'd0) stall_cycles <= stall_cycles + 1;
      case (state)
        S_IDLE: if (start) begin
          ob <= '0; pi <= '0; s <= '0; mb <= '0; stall_cycles <= '0;
          state <= (mode == MODE_FP16xINT4) ? S_SCALE : S_KV;
        end
        S_SCALE: if (go_scale) begin
          mb    <= '0;
          state <= (nmask == 0) ? S_WT : S_MASK;
        end
        S_MASK: if (go_mask) begin
          mb <= mb + 1'b1;
          if (mb == nmask - 1) state <= S_WT;
        end
        S_WT: if (go_wt) begin
          if (s == 16'(nwt) - 1) begin
            s <= '0;
            if (pi == nstep - 1) begin
              pi <= '0;
              ob <= ob + 1'b1;
              state <= (ob == noblk - 1) ? S_FIN : S_SCALE;
            end else begin
              pi <= pi + 1'b1;
              state <= S_SCALE;
            end
          end else s <= s + 1'b1;
        end
        S_KV: if (go_kv) begin
          if (s == nstep - 1) begin
            s  <= '0;
            ob <= ob + 1'b1;
            if (ob == noblk - 1) state <= S_FIN;
          end else s <= s + 1'b1;
        end
        S_FIN: begin done <= 1'b1; state <= S_IDLE; end
        default: state <= S_IDLE;
      endcase
    end
  end

  // ---------------------------------------------------------------- package registers
  always_ff @(posedge clk) begin
    for (int p = 0; p < NPE; p++) begin
      if (go_scale) scale_reg[p] <= rdata0[p];
      if (go_mask)  mask_reg[p][256*mb +: 256] <= rdata0[p];
    end
  end

  // ---------------------------------------------------------------- issue register
  logic [1:0] kv_q;
  always_ff @(posedge clk) begin
    if (!rst_n) a_valid <= 1'b0;
    else        a_valid <= go_wt || go_kv;
    if (go_wt || go_kv) begin
      a_mode  <= mode;
      a_log2r <= go_kv ? 2'd0 : log2r;
      a_enc   <= enc;
      kv_q    <= s[1:0];
      for (int p = 0; p < NPE; p++) begin
        a_wt[p]        <= {rdata1[p], rdata0[p]};
        a_scale[p]     <= go_kv ? scale0 : scale_reg[p][16*s[3:0] +: 16];
        a_mask_oh[p]   <= (TIN*8)'(mask_reg[p] >> (s * (TIN << log2r)));
        a_mask_addr[p] <= (TIN*3)'(mask_reg[p] >> (s * TIN * 3));
      end
    end
  end

  // window: the feature rows, or in FP16xFP16 mode 32 features of one row
  // spread one per group of four lanes
  always_comb begin
    a_win = fb_rd_data;
    if (a_mode == MODE_FP16xFP16) begin
      a_win = '0;
      for (int j = 0; j < TIN / 4; j++)
        a_win[64*j +: 16] = fb_rd_data[16*(int'(kv_q) * (TIN / 4) + j) +: 16];
    end
  end

endmodule
