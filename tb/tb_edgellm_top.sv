// tb_edgellm_top -- end-to-end test of the accelerator at its default size
// (32 HBM ports, 32 PEs of 128 lanes, 2 groups).
//
// Behavioural AXI memories stand in for DDR and for the 32 HBM ports. The
// test drives the host register interface and runs complete operations:
//   * feature load of a 4096-channel token from DDR,
//   * FP16xINT4 products (64 outputs x 4096 inputs) dense, 50% sparse with
//     one-hot masks, 75% sparse with in-group addresses and 87.5% sparse with
//     one-hot masks,
//   * an FP16xFP16 query x cached-key product (32 keys, head size 128),
//   * an FP16xFP16 product with 40 output blocks of a single step, which
//     fills the output FIFO faster than a deliberately slowed DDR drains it,
//   * a K/V copy from DDR into HBM port 3.
// Results read back from DDR are compared with the exact real-valued products
// computed here from the same random data; tolerances cover the 19-bit tree
// truncation and the FP16 accumulation. It counts how often each mechanism
// occurred - weight-FIFO stalls, double pops, each sparsity ratio and
// encoding, mode switches, output back-pressure, the K/V write path - and
// counts a failure for any that never did.
module tb_edgellm_top;
  timeunit 1ns; timeprecision 1ps;
  import edgellm_pkg::*;
  localparam int NPORT = 32, TIN = 128, DDW = 512;

  logic clk = 0, clk_h = 0, rst_n = 0, rst_h_n = 0;
  always #3.57 clk = ~clk;       // 140 MHz
  always #1.785 clk_h = ~clk_h;  // 280 MHz

  // host AXI-Lite
  logic s_awvalid = 0, s_awready, s_wvalid = 0, s_wready, s_bvalid, s_bready = 1;
  logic [7:0] s_awaddr = 0, s_araddr = 0; logic [31:0] s_wdata = 0, s_rdata;
  logic [1:0] s_bresp, s_rresp; logic s_arvalid = 0, s_arready, s_rvalid, s_rready = 1;
  // DDR
  logic ddr_arvalid, ddr_arready, ddr_rvalid, ddr_rready, ddr_rlast, ddr_awvalid, ddr_awready;
  logic ddr_wvalid, ddr_wready, ddr_wlast, ddr_bvalid, ddr_bready;
  logic [31:0] ddr_araddr, ddr_awaddr; logic [7:0] ddr_arlen, ddr_awlen;
  logic [2:0] ddr_arsize, ddr_awsize; logic [1:0] ddr_arburst, ddr_awburst, ddr_rresp, ddr_bresp;
  logic [DDW-1:0] ddr_rdata, ddr_wdata; logic [DDW/8-1:0] ddr_wstrb;
  // HBM
  logic [NPORT-1:0] hbm_arvalid, hbm_arready, hbm_rvalid, hbm_rready, hbm_rlast;
  logic [NPORT-1:0] hbm_awvalid, hbm_awready, hbm_wvalid, hbm_wready, hbm_wlast, hbm_bvalid, hbm_bready;
  logic [NPORT-1:0][32:0] hbm_araddr, hbm_awaddr;
  logic [NPORT-1:0][7:0] hbm_arlen, hbm_awlen;
  logic [NPORT-1:0][2:0] hbm_arsize, hbm_awsize;
  logic [NPORT-1:0][1:0] hbm_arburst, hbm_awburst, hbm_rresp, hbm_bresp;
  logic [NPORT-1:0][255:0] hbm_rdata, hbm_wdata;
  logic [NPORT-1:0][31:0] hbm_wstrb;

  edgellm_top dut (.*);

  // slow DDR write: when slow_ddr is set, write beats pass only one cycle in four
  logic m_wready, wgate = 1'b1; bit slow_ddr = 0;
  assign ddr_wready = m_wready && wgate;
  always @(posedge clk) wgate <= !slow_ddr || ($urandom_range(3) == 0);

  axi_mem_model #(.DW(DDW), .AW(32), .WORDS(4096)) ddr (
    .clk, .rst_n, .arvalid(ddr_arvalid), .arready(ddr_arready), .araddr(ddr_araddr), .arlen(ddr_arlen),
    .rvalid(ddr_rvalid), .rready(ddr_rready), .rdata(ddr_rdata), .rlast(ddr_rlast), .rresp(ddr_rresp),
    .awvalid(ddr_awvalid), .awready(ddr_awready), .awaddr(ddr_awaddr), .awlen(ddr_awlen),
    .wvalid(ddr_wvalid && wgate), .wready(m_wready), .wdata(ddr_wdata), .wlast(ddr_wlast),
    .bvalid(ddr_bvalid), .bready(ddr_bready), .bresp(ddr_bresp));

  for (genvar p = 0; p < NPORT; p++) begin : g_hbm
    axi_mem_model #(.DW(256), .AW(33), .WORDS(512)) hbm (
      .clk(clk_h), .rst_n(rst_h_n), .arvalid(hbm_arvalid[p]), .arready(hbm_arready[p]),
      .araddr(hbm_araddr[p]), .arlen(hbm_arlen[p]), .rvalid(hbm_rvalid[p]), .rready(hbm_rready[p]),
      .rdata(hbm_rdata[p]), .rlast(hbm_rlast[p]), .rresp(hbm_rresp[p]),
      .awvalid(hbm_awvalid[p]), .awready(hbm_awready[p]), .awaddr(hbm_awaddr[p]), .awlen(hbm_awlen[p]),
      .wvalid(hbm_wvalid[p]), .wready(hbm_wready[p]), .wdata(hbm_wdata[p]), .wlast(hbm_wlast[p]),
      .bvalid(hbm_bvalid[p]), .bready(hbm_bready[p]), .bresp(hbm_bresp[p]));
  end

  int checks = 0, failures = 0;

  // ---------------------------------------------------------------- helpers
  function automatic real h2r(input logic [15:0] h);
    if (h[14:10] == 0) return 0.0;
    return (h[15] ? -1.0 : 1.0) * (1.0 + real'(h[9:0]) / 1024.0) * $pow(2.0, real'(h[14:10]) - 15.0);
  endfunction
  function automatic logic [15:0] rnd_h(input int emin, input int emax);
    return {1'($urandom), 5'(emin + $urandom_range(emax - emin)), 10'($urandom)};
  endfunction

  task automatic reg_wr(input int idx, input logic [31:0] v);
    @(negedge clk);
    s_awvalid = 1; s_awaddr = 8'(idx * 4); s_wvalid = 1; s_wdata = v;
    while (s_awvalid || s_wvalid) begin
      bit aw, w;
      aw = s_awvalid && s_awready; w = s_wvalid && s_wready;
      @(negedge clk);
      if (aw) s_awvalid = 0;
      if (w)  s_wvalid = 0;
    end
    while (!s_bvalid) @(negedge clk);
    @(negedge clk);
  endtask

  task automatic reg_rd(input int idx, output logic [31:0] v);
    @(negedge clk);
    s_arvalid = 1; s_araddr = 8'(idx * 4);
    while (!s_arready) @(negedge clk);
    @(negedge clk); s_arvalid = 0;
    while (!s_rvalid) @(negedge clk);
    v = s_rdata;
    @(negedge clk);
  endtask

  task automatic run_op(input int op, output int cyc);
    logic [31:0] st;
    int guard = 0;
    reg_wr(0, 32'(op << 1) | 32'd1);
    $display("op %0d started at %t", op, $time);
    do begin reg_rd(1, st); guard++; end while (!st[1] && guard < 200000);
    if (!st[1]) begin failures++; $display("FAIL: op %0d never finished", op); end
    reg_rd(13, st); cyc = int'(st);
  endtask

  // ---------------------------------------------------------------- data
  logic [15:0] x [4096];                 // token features
  logic [3:0]  wq [64][4096];            // dense view of the INT4 weights
  real         sc [64][4096];            // scale that applies to weight (c, k)

  // mechanism counters
  int n_stall_ops = 0, n_double = 0, n_afull = 0, n_sparse[4][2], n_mode_sw = 0, n_kv = 0, n_wfull = 0;
  pe_mode_e last_mode = MODE_FP16xINT4;
  always @(posedge clk) if (rst_n) begin
    if (dut.pop == 2'd2) n_double++;
    if (dut.u_ctrl.busy && dut.out_afull) n_afull++;
    if (dut.a_valid && dut.a_mode != last_mode) begin n_mode_sw++; last_mode = dut.a_mode; end
  end
  always @(posedge clk_h) if (rst_h_n && (dut.wf_v != 0) && ((dut.wf_v & ~dut.wf_r) != 0)) n_wfull++;

  // Build the HBM image of one FP16xINT4 product: 2 output blocks, 2 portions.
  task automatic build_int4(input int log2r, input mask_enc_e enc);
    int r = 1 << log2r, nnz = 8 >> log2r, nmask, nwt, beat;
    nwt = 32 >> log2r;
    nmask = (log2r == 0) ? 0 : (enc == ENC_ONEHOT ? 8 : 24 >> log2r);
    for (int c = 0; c < 64; c++) for (int k = 0; k < 4096; k++) begin wq[c][k] = 0; sc[c][k] = 0.0; end
    for (int p = 0; p < NPORT; p++) begin
      beat = 0;
      for (int ob = 0; ob < 2; ob++) begin
        int c = ob * 32 + p;
        for (int pi = 0; pi < 2; pi++) begin
          logic [255:0] sb; logic [3071:0] mk; logic [8191:0] wb;
          sb = '0; mk = '0; wb = '0;
          for (int s = 0; s < 16 / r; s++) sb[16*s +: 16] = rnd_h(13, 16);
          for (int s = 0; s < 16 / r; s++)
            for (int g = 0; g < 128 / nnz; g++) begin
              bit used[8]; int k;
              used = '{default: 0};
              for (int n = 0; n < nnz; n++) begin int o; do o = $urandom_range(7); while (used[o]); used[o] = 1; end
              k = 0;
              for (int o = 0; o < 8; o++) if (used[o] || r == 1) begin
                int j = g * nnz + k, ch = pi * 2048 + s * 128 * r + 8 * g + o;
                logic [3:0] w = 4'($urandom);
                if (r == 1) begin j = 8 * g + o; ch = pi * 2048 + s * 128 + j; end
                wb[4*(s*128 + j) +: 4] = w;
                wq[c][ch] = w;
                sc[c][ch] = h2r(sb[16*s +: 16]);
                if (r > 1) begin
                  if (enc == ENC_ONEHOT) mk[s*128*r + 8*g + o] = 1'b1;
                  else mk[3*(s*128 + j) +: 3] = 3'(o);
                end
                k++;
              end
            end
          put_beat(p, beat, sb); beat++;
          for (int m = 0; m < nmask; m++) begin put_beat(p, beat, mk[256*m +: 256]); beat++; end
          for (int w = 0; w < nwt; w++) begin put_beat(p, beat, wb[256*w +: 256]); beat++; end
        end
      end
    end
  endtask

  // HBM images are staged here and copied into the 32 port memories by push_img
  task automatic put_beat(input int p, input int idx, input logic [255:0] d);
    hbm_img[p][idx] = d;
  endtask
  logic [255:0] hbm_img [NPORT][512];
  bit load_img = 0;
  for (genvar p = 0; p < NPORT; p++) begin : g_load
    always @(posedge load_img) for (int i = 0; i < 512; i++) g_hbm[p].hbm.mem[i] = hbm_img[p][i];
  end

  task automatic push_img();
    load_img = 1; #1; load_img = 0; #1;
  endtask

  task automatic check_outputs(input int nout, input int dst_word, input string tag,
                               input bit fp16kv, input real kscale);
    for (int c = 0; c < nout; c++) begin
      real ex = 0.0, mag = 0.0, got, err;
      logic [15:0] h;
      if (!fp16kv) begin
        for (int k = 0; k < 4096; k++) begin
          real t = h2r(x[k]) * real'($signed(wq[c][k])) * sc[c][k];
          ex += t; mag += (t < 0 ? -t : t);
        end
      end else begin
        for (int k = 0; k < 128; k++) begin
          real t = h2r(x[k]) * h2r(kc[c][k]) * kscale;
          ex += t; mag += (t < 0 ? -t : t);
        end
      end
      h = ddr.mem[dst_word + c / 32][16*(c % 32) +: 16];
      got = h2r(h);
      err = got - ex; if (err < 0) err = -err;
      checks++;
      if (err > 0.01 * mag + 0.002 * (ex < 0 ? -ex : ex) + 1e-3) begin
        failures++;
        if (failures < 20) $display("FAIL %s out %0d: got %f exp %f (sum|t| %f)", tag, c, got, ex, mag);
      end
    end
  endtask

  logic [15:0] kc [1280][128];   // cached keys for the FP16xFP16 tests

  initial begin
    #20ms; failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int cyc, ratios[4] = '{0, 1, 2, 3};
    mask_enc_e encs[4] = '{ENC_ONEHOT, ENC_ONEHOT, ENC_ADDR, ENC_ONEHOT};
    n_sparse = '{default: 0};
    for (int i = 0; i < 4096; i++) ddr.mem[i] = '0;
    repeat (4) @(posedge clk); rst_n = 1; rst_h_n = 1;
    repeat (4) @(posedge clk);

    // features: 4096 channels = 128 DDR beats at word 0
    for (int k = 0; k < 4096; k++) x[k] = ($urandom_range(9) == 0) ? 16'h0 : rnd_h(12, 16);
    for (int b = 0; b < 128; b++) for (int j = 0; j < 32; j++) ddr.mem[b][16*j +: 16] = x[32*b + j];
    reg_wr(6, 0); reg_wr(8, 128); reg_wr(12, 0);
    run_op(1, cyc);
    $display("feature load: %0d cycles at %t", cyc, $time);
    checks++;
    if (dut.u_fbuf.mem[1][0][16*5 +: 16] !== x[128 + 5]) begin failures++; $display("FAIL feature load"); end

    // FP16 x INT4 products at four sparsity levels
    for (int t = 0; t < 4; t++) begin
      logic [31:0] stall;
      build_int4(ratios[t], encs[t]);
      push_img();
      reg_wr(2, {28'd0, 1'(encs[t]), 2'(ratios[t]), 1'b1});
      reg_wr(3, 2); reg_wr(4, 2); reg_wr(7, 32'(2048 * 64)); reg_wr(9, 0);
      run_op(2, cyc);
      $display("INT4 product, R=%0d enc=%0d: %0d cycles, %0d stall cycles", 1 << ratios[t], encs[t], cyc, dut.stall_cycles);
      if (dut.stall_cycles != 0) n_stall_ops++;
      n_sparse[ratios[t]][encs[t]]++;
      check_outputs(64, 2048, $sformatf("R%0d", 1 << ratios[t]), 0, 0.0);
      // rate: 2 blocks x 2 portions of (1 + masks + 16/R) cycles at full speed
      checks++;
      if (cyc > 8 * (1 + 8 + 16) + 200) begin failures++; $display("FAIL: product too slow (%0d cycles)", cyc); end
    end

    // FP16 x FP16: query (channels 0..127 of x) against 32 cached keys
    for (int tk = 0; tk < 32; tk++) for (int k = 0; k < 128; k++) kc[tk][k] = rnd_h(12, 16);
    for (int p = 0; p < NPORT; p++)
      for (int s = 0; s < 4; s++) begin
        logic [511:0] w;
        for (int j = 0; j < 32; j++) w[16*j +: 16] = kc[p][32*s + j];
        put_beat(p, 2*s, w[255:0]); put_beat(p, 2*s + 1, w[511:256]);
      end
    push_img();
    reg_wr(2, 0); reg_wr(3, 4); reg_wr(4, 1); reg_wr(5, 32'h3000); reg_wr(7, 32'(2048 * 64));
    run_op(2, cyc);
    check_outputs(32, 2048, "QK", 1, 0.125);

    // FP16 x FP16 with one step per output block: output back-pressure
    for (int tk = 0; tk < 1280; tk++) for (int k = 0; k < 128; k++) kc[tk][k] = (k < 32) ? rnd_h(12, 16) : 16'h0;
    for (int p = 0; p < NPORT; p++)
      for (int ob = 0; ob < 40; ob++) begin
        logic [511:0] w;
        for (int j = 0; j < 32; j++) w[16*j +: 16] = kc[ob*32 + p][j];
        put_beat(p, 2*ob, w[255:0]); put_beat(p, 2*ob + 1, w[511:256]);
      end
    push_img();
    reg_wr(3, 1); reg_wr(4, 40); reg_wr(5, 32'h3c00);
    slow_ddr = 1;
    run_op(2, cyc);
    slow_ddr = 0;
    check_outputs(1280, 2048, "QK40", 1, 1.0);

    // K/V copy: 4 DDR beats (x channels 0..127) into HBM port 3 at word 256
    reg_wr(6, 0); reg_wr(8, 4); reg_wr(10, 3); reg_wr(11, 256 * 32);
    run_op(3, cyc);
    for (int b = 0; b < 8; b++) begin
      checks++;
      if (g_hbm[3].hbm.mem[256 + b] !== ddr.mem[b / 2][256*(b % 2) +: 256]) begin
        failures++; $display("FAIL K/V copy beat %0d", b);
      end
    end
    n_kv = g_hbm[3].hbm.writes;

    $display("mechanisms: stall-ops %0d double-pops %0d afull %0d mode-switches %0d kv-writes %0d wfifo-full %0d",
             n_stall_ops, n_double, n_afull, n_mode_sw, n_kv, n_wfull);
    for (int r = 0; r < 4; r++) $display("  R=%0d onehot %0d addr %0d", 1 << r, n_sparse[r][0], n_sparse[r][1]);
    checks += 7;
    if (n_stall_ops == 0) begin failures++; $display("FAIL: no weight-FIFO stall"); end
    if (n_double == 0)    begin failures++; $display("FAIL: no double pop"); end
    if (n_afull == 0)     begin failures++; $display("FAIL: no output back-pressure"); end
    if (n_mode_sw == 0)   begin failures++; $display("FAIL: no mode switch"); end
    if (n_kv == 0)        begin failures++; $display("FAIL: no K/V write"); end
    if (n_sparse[1][0] == 0 || n_sparse[2][1] == 0 || n_sparse[3][0] == 0 || n_sparse[0][0] == 0)
      begin failures++; $display("FAIL: a sparsity case never ran"); end
    if (n_wfull == 0) $display("note: weight FIFO never filled");
    checks--;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
