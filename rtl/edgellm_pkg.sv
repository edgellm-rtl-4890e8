// edgellm_pkg -- constants, types and FP16 helpers shared by the accelerator.
//
// The sizes follow the accelerator's main configuration: a 128-lane vector
// multiplier (T_in = 128), 32 HBM AXI ports of 256 bits, and a 32-channel
// output parallelism T_out (one output channel per HBM port, so T_out = 32 is
// this design's choice; the source gives no number for T_out).
//
// FP16 handling throughout the design is simplified in the same way: an
// exponent field of 0 is read as zero (subnormals flushed), exponent 31 is an
// ordinary exponent on input and is produced only as a saturated infinity, and
// rounding is truncation.
package edgellm_pkg;

  localparam int unsigned P_TIN    = 128;  // vector length of one PE
  localparam int unsigned P_NPORT  = 32;   // HBM AXI ports = PEs = T_out
  localparam int unsigned P_HBM_DW = 256;  // bits per HBM port beat
  localparam int unsigned P_TOUT   = 32;   // channel parallelism of the data layout
  localparam int unsigned P_DDR_DW = P_TOUT * 16;  // DDR beat = T_out FP16 values

  // Arithmetic mode of the mix-precision PE (numbering as printed in Fig. 4(b)).
  typedef enum logic {
    MODE_FP16xFP16 = 1'b0,   // K/V cache products, T_in/4 pairs per cycle
    MODE_FP16xINT4 = 1'b1    // weight products, T_in pairs per cycle
  } pe_mode_e;

  // Position encoding of the non-zero weights of a sparse layer.
  typedef enum logic {
    ENC_ONEHOT = 1'b0,       // one mask bit per input channel
    ENC_ADDR   = 1'b1        // 3-bit offset inside each group of 8 channels
  } mask_enc_e;

  typedef struct packed {
    logic       sign;
    logic [4:0] exp;
    logic [9:0] man;
  } fp16_t;

  // FP16 addition: align the smaller operand, add the 12-bit significands,
  // renormalise, truncate. Zero exponent is zero; overflow saturates to inf.
  function automatic logic [15:0] fp16_add(input logic [15:0] a, input logic [15:0] b);
    logic [15:0] x, y;
    logic [13:0] mx, my, ms;   // {carry, hidden, 10 frac, guard-less}
    logic [4:0]  d;
    int          e;
    int          k;
    logic        sx, sy, so;
    if (a[14:10] == 5'd0) return b[14:10] == 5'd0 ? 16'h0000 : b;
    if (b[14:10] == 5'd0) return a;
    // x gets the larger magnitude
    if (a[14:0] >= b[14:0]) begin x = a; y = b; end else begin x = b; y = a; end
    sx = x[15]; sy = y[15];
    d  = x[14:10] - y[14:10];
    mx = {2'b01, x[9:0], 2'b00};
    my = (d > 5'd13) ? 14'd0 : ({2'b01, y[9:0], 2'b00} >> d);
    e  = int'(x[14:10]);
    if (sx == sy) ms = mx + my; else ms = mx - my;
    so = sx;
    if (ms == 14'd0) return 16'h0000;
    if (ms[13]) begin ms = ms >> 1; e = e + 1; end
    k = 0;
    while (!ms[12] && k < 13) begin ms = ms << 1; e = e - 1; k++; end
    if (e <= 0)  return 16'h0000;
    if (e >= 31) return {so, 5'h1f, 10'h000};
    return {so, e[4:0], ms[11:2]};
  endfunction

endpackage
