// tb_feat_buf -- self-checking test of the banked feature buffer at its
// default size (128 rows of 128 FP16 features, 512-bit write quarters).
// Random rows are written quarter by quarter, then every start row 0..127 is
// read and the eight returned rows are compared with a reference copy; the
// read latency of one cycle is checked on every read.
module tb_feat_buf;
  timeunit 1ns; timeprecision 1ps;
  localparam int TIN = 128, QW = 512, ROWS = 128, RW = TIN * 16;

  logic clk = 0;
  always #3.57 clk = ~clk;
  logic wr_en = 0, rd_en = 0;
  logic [6:0] wr_row = 0, rd_row = 0;
  logic [1:0] wr_q = 0;
  logic [QW-1:0] wr_data = '0;
  logic [8*RW-1:0] rd_data;

  feat_buf dut (.*);

  int checks = 0, failures = 0;
  logic [RW-1:0] ref_m [ROWS];

  initial begin
    #2ms; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    @(negedge clk);
    for (int r = 0; r < ROWS; r++)
      for (int q = 0; q < 4; q++) begin
        logic [QW-1:0] d;
        for (int i = 0; i < QW / 32; i++) d[32*i +: 32] = $urandom;
        ref_m[r][QW*q +: QW] = d;
        wr_en = 1; wr_row = 7'(r); wr_q = 2'(q); wr_data = d;
        @(negedge clk);
      end
    wr_en = 0;
    for (int pass = 0; pass < 2; pass++)
      for (int r = 0; r < ROWS; r++) begin
        int st = pass ? $urandom_range(ROWS - 1) : r;
        rd_en = 1; rd_row = 7'(st);
        @(negedge clk);
        rd_en = 0; rd_row = 7'($urandom);   // data must not follow the address
        for (int k = 0; k < 8; k++) begin
          checks++;
          if (rd_data[RW*k +: RW] !== ref_m[(st + k) % ROWS]) begin
            failures++;
            if (failures < 10) $display("FAIL start %0d row +%0d", st, k);
          end
        end
        @(negedge clk);
        checks++;   // held while rd_en is low
        if (rd_data[RW-1:0] !== ref_m[st]) begin failures++; $display("FAIL hold at start %0d", st); end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
