// mp_vec_pe -- mix-precision vector multiplier (one PE of the array).
//
// Computes   out = scale * sum_i dat_i * wt_i   as an FP16 number, for either
//   MODE 1 (FP16 x INT4):  TIN FP16 features times TIN INT4 weights, or
//   MODE 0 (FP16 x FP16):  TIN/4 FP16 features times TIN/4 FP16 K/V values.
// In MODE 0 each FP16 weight is split into three 4-bit slices
// (WT[10:7], WT[6:3], {WT[2:0],1'b0}) that occupy three of the four lanes of a
// group, with exponent offsets +8, +4 and +0; the fourth lane is zero. So both
// modes use the same TIN 11x4-bit multipliers and the same weight bandwidth.
//
// Pipeline (four register stages, one vector per cycle, latency 4):
//   stage 0  input processing: split sign / exponent / mantissa per lane
//   stage 1  sign XOR, maximum-exponent search and exponent distances,
//            11x4-bit mantissa multipliers
//   stage 2  alignment shifter, sign-magnitude -> two's complement,
//            ADD_W-bit adder tree, back to sign-magnitude
//   stage 3  leading-zero count, normalisation, exponent adjustment,
//            multiplication by the FP16 scale, packing to FP16
//
// The lane-to-slice mapping, the exponent offsets, the 19-bit adder tree and
// the stage contents follow the published block diagram. Choices made here:
// INT4 weights are two's complement (magnitude 0..8, so the product is 15 bits
// where the diagram prints 14); a lane with a zero operand gets exponent 0 so
// it never sets the maximum; every aligned product is pre-shifted right by
// log2(TIN) so that TIN terms can never overflow the ADD_W-bit tree; the
// normalised sum and the scale product are truncated, not rounded; results
// below the FP16 range flush to zero and above it saturate to infinity.
//
// Interface: in_valid qualifies dat/wt/scale/mode; out_valid/out appear
// exactly 4 clock cycles later. Synchronous active-low reset clears valids.
module mp_vec_pe
  import edgellm_pkg::*;
#(
  parameter int unsigned TIN   = 128,
  parameter int unsigned ADD_W = 19
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  pe_mode_e          mode,
  input  logic [TIN*16-1:0] dat,
  input  logic [TIN*4-1:0]  wt,
  input  logic [15:0]       scale,
  output logic              out_valid,
  output logic [15:0]       out
);
  localparam int unsigned LOGT  = $clog2(TIN);
  localparam int unsigned PW    = 15;             // product width (11 x 4 bits)
  localparam int unsigned MAGW  = ADD_W - 1;      // magnitude bits in the tree
  localparam int unsigned GRD   = MAGW - PW;      // extra low bits of a leaf
  localparam int          BIAS0 = 51;             // 2^(L-51): FP16 x FP16 lanes
  localparam int          BIAS1 = 28;             // 2^(L-28): FP16 x INT4 lanes

  initial begin
    assert (TIN % 4 == 0 && TIN >= 4) else $error("TIN must be a multiple of 4");
    assert (ADD_W >= PW + 1 + 1) else $error("ADD_W too small");
  end

  // ---------------------------------------------------------------- stage 0
  logic [TIN-1:0]       s0_sd, s0_sw;
  logic [TIN-1:0][6:0]  s0_exp;
  logic [TIN-1:0][10:0] s0_a;
  logic [TIN-1:0][3:0]  s0_b;
  logic                 s0_v;
  pe_mode_e             s0_mode;
  logic [15:0]          s0_scale;

  always_ff @(posedge clk) begin
    if (!rst_n) s0_v <= 1'b0;
    else        s0_v <= in_valid;
    s0_mode  <= mode;
    s0_scale <= scale;
    for (int i = 0; i < TIN; i++) begin
      if (mode == MODE_FP16xINT4) begin
        logic [15:0] d;
        logic [3:0]  w;
        logic [3:0]  wm;
        d  = dat[16*i +: 16];
        w  = wt[4*i +: 4];
        wm = w[3] ? 4'(-w) : w;
        s0_sd[i]  <= d[15];
        s0_sw[i]  <= w[3];
        s0_a[i]   <= (d[14:10] == 5'd0) ? 11'd0 : {1'b1, d[9:0]};
        s0_b[i]   <= wm;
        s0_exp[i] <= (d[14:10] == 5'd0 || wm == 4'd0) ? 7'd0 : 7'(d[14:10]) + 7'd3;
      end else begin
        logic [15:0] d;
        logic [15:0] w;
        logic [10:0] wm;
        logic        z;
        d  = dat[64*(i/4) +: 16];
        w  = wt[16*(i/4) +: 16];
        wm = {1'b1, w[9:0]};
        z  = (d[14:10] == 5'd0) || (w[14:10] == 5'd0) || (i % 4 == 3);
        s0_sd[i] <= d[15];
        s0_sw[i] <= w[15];
        s0_a[i]  <= z ? 11'd0 : {1'b1, d[9:0]};
        case (i % 4)
          0:       s0_b[i] <= {wm[2:0], 1'b0};
          1:       s0_b[i] <= wm[6:3];
          2:       s0_b[i] <= wm[10:7];
          default: s0_b[i] <= 4'd0;
        endcase
        s0_exp[i] <= z ? 7'd0 : 7'(d[14:10]) + 7'(w[14:10]) + 7'(4 * (i % 4));
      end
    end
  end

  // ---------------------------------------------------------------- stage 1
  logic [6:0] emax_c;
  always_comb begin
    emax_c = 7'd0;
    for (int i = 0; i < TIN; i++)
      if (s0_exp[i] > emax_c) emax_c = s0_exp[i];
  end

  logic [TIN-1:0]        s1_sg;
  logic [TIN-1:0][6:0]   s1_sh;
  logic [TIN-1:0][PW-1:0] s1_p;
  logic [6:0]            s1_emax;
  logic                  s1_v;
  pe_mode_e              s1_mode;
  logic [15:0]           s1_scale;

  always_ff @(posedge clk) begin
    if (!rst_n) s1_v <= 1'b0;
    else        s1_v <= s0_v;
    s1_mode  <= s0_mode;
    s1_scale <= s0_scale;
    s1_emax  <= emax_c;
    for (int i = 0; i < TIN; i++) begin
      s1_sg[i] <= s0_sd[i] ^ s0_sw[i];
      s1_sh[i] <= emax_c - s0_exp[i];
      s1_p[i]  <= PW'(s0_a[i]) * PW'(s0_b[i]);
    end
  end

  // ---------------------------------------------------------------- stage 2
  logic signed [ADD_W-1:0] sum_c;
  always_comb begin
    sum_c = '0;
    for (int i = 0; i < TIN; i++) begin
      logic [MAGW-1:0]         lf;
      logic [7:0]              sh;
      logic signed [ADD_W-1:0] tc;
      sh = 8'(s1_sh[i]) + 8'(LOGT);
      lf = (sh >= 8'(MAGW)) ? '0 : (MAGW'({s1_p[i], GRD'(0)}) >> sh);   // alignment shifter
      tc = s1_sg[i] ? -$signed({1'b0, lf}) : $signed({1'b0, lf});       // Orig2Comp
      sum_c = sum_c + tc;                                                  // adder tree
    end
  end

  logic            s2_sg;
  logic [MAGW-1:0] s2_mag;
  logic [6:0]      s2_emax;
  logic            s2_v;
  pe_mode_e        s2_mode;
  logic [15:0]     s2_scale;

  always_ff @(posedge clk) begin
    if (!rst_n) s2_v <= 1'b0;
    else        s2_v <= s1_v;
    s2_mode  <= s1_mode;
    s2_scale <= s1_scale;
    s2_emax  <= s1_emax;
    s2_sg    <= sum_c[ADD_W-1];                                   // Comp2Orig
    s2_mag   <= sum_c[ADD_W-1] ? MAGW'(-sum_c) : MAGW'(sum_c);
  end

  // ---------------------------------------------------------------- stage 3
  logic [15:0] res_c;
  always_comb begin
    int          lz;
    int          esum;
    int          eo;
    logic [MAGW-1:0] nrm;
    logic [10:0] m;
    logic [21:0] pr;
    logic [9:0]  mo;
    logic        so;
    lz = 0;                                            // LZAC
    for (int k = MAGW - 1; k >= 0; k--) begin
      if (s2_mag[k]) break;
      lz++;
    end
    nrm  = s2_mag << lz;                               // add-result shifter
    m    = nrm[MAGW-1 -: 11];
    esum = int'(s2_emax) + (int'(MAGW) - 11) + 25 - int'(GRD) + int'(LOGT)
         - ((s2_mode == MODE_FP16xFP16) ? BIAS0 : BIAS1) - lz;   // exponent adjuster
    pr   = 22'(m) * 22'({1'b1, s2_scale[9:0]});        // multiplier
    if (pr[21]) begin mo = pr[20:11]; eo = esum + int'(s2_scale[14:10]) - 14; end
    else        begin mo = pr[19:10]; eo = esum + int'(s2_scale[14:10]) - 15; end
    so = s2_sg ^ s2_scale[15];                         // XOR
    if (s2_mag == '0 || s2_scale[14:10] == 5'd0 || eo <= 0) res_c = 16'h0000;  // integrator
    else if (eo >= 31) res_c = {so, 5'h1f, 10'h000};
    else               res_c = {so, 5'(eo), mo};
  end

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= s2_v;
    out <= res_c;
  end

endmodule
