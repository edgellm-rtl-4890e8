// tb_sparse_sel -- self-checking test of the sparse activation selector.
//
// For each ratio R and both encodings, builds a random structured-sparse
// weight row (at most 8/R non-zeros per group of 8), derives its one-hot mask
// and its address list, and checks that every selected activation is the one
// at the channel of the corresponding stored weight. Features are tagged with
// their channel number so a wrong pick is always visible.
module tb_sparse_sel;
  timeunit 1ns; timeprecision 1ps;
  import edgellm_pkg::*;
  localparam int TIN = 128, MAXR = 8;

  logic [1:0]             log2r;
  mask_enc_e              enc;
  logic [TIN*MAXR*16-1:0] win;
  logic [TIN*MAXR-1:0]    mask_oh;
  logic [TIN*3-1:0]       mask_addr;
  logic [TIN*16-1:0]      sel;

  sparse_sel #(.TIN(TIN), .MAXR(MAXR)) dut (.*);

  int checks = 0, failures = 0;
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int nnz, ch[TIN], nused[4][2];
    nused = '{default: 0};
    for (int t = 0; t < 200; t++) begin
      log2r = 2'(t % 4);
      enc   = mask_enc_e'((t / 4) % 2);
      nnz   = 8 >> log2r;
      for (int c = 0; c < TIN * MAXR; c++) win[16*c +: 16] = 16'(c) ^ 16'(t << 10);
      mask_oh = '0; mask_addr = '0;
      // choose channels: for group g, nnz distinct ascending offsets
      for (int g = 0; g < TIN / nnz; g++) begin
        bit used[8];
        int k;
        used = '{default: 0};
        for (int n = 0; n < nnz; n++) begin
          int o;
          do o = $urandom_range(7); while (used[o]);
          used[o] = 1;
        end
        k = 0;
        for (int o = 0; o < 8; o++) if (used[o]) begin
          ch[g * nnz + k] = 8 * g + o;
          mask_oh[8 * g + o] = 1'b1;
          mask_addr[3 * (g * nnz + k) +: 3] = 3'(o);
          k++;
        end
      end
      #1;
      nused[log2r][enc]++;
      for (int j = 0; j < TIN; j++) begin
        logic [15:0] e;
        e = (log2r == 0) ? win[16*j +: 16] : win[16*ch[j] +: 16];
        checks++;
        if (sel[16*j +: 16] !== e) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d R=%0d enc=%0d lane %0d got %h exp %h", t, 1 << log2r, enc, j, sel[16*j +: 16], e);
        end
      end
      #1;
    end
    // a one-hot group with fewer non-zeros than allowed yields zero lanes
    log2r = 2'd2; enc = ENC_ONEHOT; mask_oh = '0;
    for (int g = 0; g < TIN / 2; g++) mask_oh[8 * g + 5] = 1'b1;
    #1;
    for (int g = 0; g < TIN / 2; g++) begin
      checks += 2;
      if (sel[16*(2*g) +: 16] !== win[16*(8*g+5) +: 16]) failures++;
      if (sel[16*(2*g+1) +: 16] !== 16'h0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
