// tb_mp_vec_pe -- self-checking test of the mix-precision vector multiplier.
//
// Drives random vectors in both modes at the full vector length (TIN = 128),
// back to back, and checks each result two ways:
//   * bit-exact against a reference model written here from the arithmetic
//     specification (per-lane exact products on a common exponent grid,
//     truncation to the 19-bit tree grid, normalise, scale, truncate), and
//   * against the exact real-valued dot product, within a tolerance set by
//     the tree's truncation and FP16 output precision.
// It also checks the 4-cycle latency and that one result leaves per cycle.
module tb_mp_vec_pe;
  timeunit 1ns; timeprecision 1ps;
  import edgellm_pkg::*;
  localparam int TIN = 128;
  localparam int NVEC = 400;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic              in_valid;
  pe_mode_e          mode;
  logic [TIN*16-1:0] dat;
  logic [TIN*4-1:0]  wt;
  logic [15:0]       scale;
  logic              out_valid;
  logic [15:0]       out;

  mp_vec_pe #(.TIN(TIN)) dut (.*);

  int checks = 0, failures = 0;

  function automatic real fp16_real(input logic [15:0] h);
    if (h[14:10] == 0) return 0.0;
    return (h[15] ? -1.0 : 1.0) * (1.0 + real'(h[9:0]) / 1024.0) * $pow(2.0, real'(h[14:10]) - 15.0);
  endfunction

  // Reference: every lane is an exact integer p_i * 2^(L_i - bias); the
  // hardware keeps floor(p_i * 2^(3 - (Lmax - L_i) - log2 TIN)) per lane.
  function automatic logic [15:0] ref_model(input pe_mode_e md, input logic [TIN*16-1:0] d,
                                            input logic [TIN*4-1:0] w, input logic [15:0] sc);
    longint p[TIN]; int le[TIN]; bit ng[TIN];
    int lmax, bias, lz, e, eo; longint s, mag, m, pr; bit neg;
    lmax = 0;
    for (int i = 0; i < TIN; i++) begin
      if (md == MODE_FP16xINT4) begin
        int wi = $signed(w[4*i +: 4]);
        logic [15:0] x = d[16*i +: 16];
        longint a = (x[14:10] == 0) ? 0 : (1024 + x[9:0]);
        p[i]  = a * (wi < 0 ? -wi : wi);
        ng[i] = x[15] ^ (wi < 0);
        le[i] = (a == 0 || wi == 0) ? 0 : x[14:10] + 3;
      end else begin
        logic [15:0] x = d[64*(i/4) +: 16];
        logic [15:0] y = w[16*(i/4) +: 16];
        longint a = 1024 + x[9:0], b = 1024 + y[9:0];
        bit z = (x[14:10] == 0) || (y[14:10] == 0) || (i % 4 == 3);
        longint part;
        case (i % 4) 0: part = (b % 8) * 2; 1: part = (b / 8) % 16; 2: part = b / 128; default: part = 0; endcase
        p[i]  = z ? 0 : a * part;
        ng[i] = x[15] ^ y[15];
        le[i] = z ? 0 : x[14:10] + y[14:10] + 4 * (i % 4);
      end
      if (le[i] > lmax) lmax = le[i];
    end
    bias = (md == MODE_FP16xINT4) ? 28 : 51;
    s = 0;
    for (int i = 0; i < TIN; i++) begin
      int sh = (lmax - le[i]) + 7 - 3;       // log2(128) = 7, 3 guard bits
      longint t = (sh >= 64) ? 0 : (sh >= 0 ? (p[i] >>> sh) : (p[i] <<< -sh));
      if (lmax - le[i] + 7 >= 18) t = 0;
      s += ng[i] ? -t : t;
    end
    neg = s < 0; mag = neg ? -s : s;
    if (mag == 0 || sc[14:10] == 0) return 16'h0;
    lz = 0; for (int k = 17; k >= 0; k--) begin if (mag[k]) break; lz++; end
    m  = (mag << lz) >> 7;
    e  = lmax + 7 + 25 - 3 + 7 - bias - lz;
    pr = m * (1024 + sc[9:0]);
    if (pr >= (1 << 21)) begin eo = e + sc[14:10] - 14; pr = pr >> 11; end
    else                 begin eo = e + sc[14:10] - 15; pr = pr >> 10; end
    if (eo <= 0) return 16'h0;
    if (eo >= 31) return {neg ^ sc[15], 5'h1f, 10'h0};
    return {neg ^ sc[15], 5'(eo), 10'(pr)};
  endfunction

  function automatic real exact(input pe_mode_e md, input logic [TIN*16-1:0] d,
                                input logic [TIN*4-1:0] w, input logic [15:0] sc);
    real acc = 0.0;
    if (md == MODE_FP16xINT4)
      for (int i = 0; i < TIN; i++) acc += fp16_real(d[16*i +: 16]) * real'($signed(w[4*i +: 4]));
    else
      for (int i = 0; i < TIN/4; i++) acc += fp16_real(d[64*i +: 16]) * fp16_real(w[16*i +: 16]);
    return acc * fp16_real(sc);
  endfunction

  function automatic real bound(input pe_mode_e md, input logic [TIN*16-1:0] d,
                                input logic [TIN*4-1:0] w, input logic [15:0] sc);
    real mx = 0.0, v;
    if (md == MODE_FP16xINT4)
      for (int i = 0; i < TIN; i++) begin v = fp16_real(d[16*i +: 16]) * real'($signed(w[4*i +: 4])); if (v < 0) v = -v; if (v > mx) mx = v; end
    else
      for (int i = 0; i < TIN/4; i++) begin v = fp16_real(d[64*i +: 16]) * fp16_real(w[16*i +: 16]); if (v < 0) v = -v; if (v > mx) mx = v; end
    v = fp16_real(sc); if (v < 0) v = -v;
    return mx * v;
  endfunction

  function automatic logic [15:0] rnd_fp16(input int emin, input int emax);
    return {1'($urandom), 5'(emin + $urandom_range(emax - emin)), 10'($urandom)};
  endfunction

  // stimulus queue of expected outputs
  logic [15:0] exp_q[$];
  real         ex_q[$], bd_q[$];
  int          sent_cycle[$];
  int          cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int nmode[2] = '{0, 0};
  initial begin
    in_valid = 0; mode = MODE_FP16xINT4; dat = '0; wt = '0; scale = 16'h3c00;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int n = 0; n < NVEC; n++) begin
      mode = (n % 3 == 0) ? MODE_FP16xFP16 : MODE_FP16xINT4;
      nmode[mode]++;
      for (int i = 0; i < TIN; i++) begin
        dat[16*i +: 16] = ($urandom_range(15) == 0) ? 16'h0 : rnd_fp16(8, 20);
        wt[4*i +: 4]    = 4'($urandom);
      end
      if (mode == MODE_FP16xFP16)
        for (int i = 0; i < TIN/4; i++) begin
          dat[64*i+16 +: 48] = '0;
          wt[16*i +: 16] = rnd_fp16(10, 18);
        end
      if (n % 50 == 7) wt = '0;          // an all-zero vector
      scale = (n % 2) ? 16'h3c00 : rnd_fp16(10, 18);
      in_valid = 1;
      exp_q.push_back(ref_model(mode, dat, wt, scale));
      ex_q.push_back(exact(mode, dat, wt, scale));
      bd_q.push_back(bound(mode, dat, wt, scale));
      sent_cycle.push_back(cyc);
      @(posedge clk);
      if (n % 37 == 0) begin in_valid = 0; @(posedge clk); end
    end
    in_valid = 0;
    repeat (10) @(posedge clk);
    if (exp_q.size() != 0) begin failures++; $display("FAIL: %0d results missing", exp_q.size()); end
    checks++;
    if (nmode[0] == 0 || nmode[1] == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    logic [15:0] e; real ex, bd, got, err;
    int lat;
    if (exp_q.size() == 0) begin failures++; $display("FAIL: unexpected output"); end
    else begin
      e = exp_q.pop_front(); ex = ex_q.pop_front(); bd = bd_q.pop_front();
      lat = cyc - sent_cycle.pop_front();
      checks += 3;
      if (out !== e) begin failures++; $display("FAIL bit-exact: got %h exp %h", out, e); end
      if (lat != 4) begin failures++; $display("FAIL latency %0d", lat); end
      got = fp16_real(out);
      err = got - ex; if (err < 0) err = -err;
      // truncation: each of 128 terms loses < 2^-11 of the largest term, plus FP16 output
      if (err > bd * 0.08 + (ex < 0 ? -ex : ex) * 0.003 + 1e-6) begin
        failures++; $display("FAIL accuracy: got %f exact %f bound %f", got, ex, bd);
      end
    end
  end
endmodule
