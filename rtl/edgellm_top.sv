// edgellm_top -- the LLM accelerator IP: matrix/vector engine with HBM weight
// streaming, DDR feature I/O and the K/V-cache copy path.
//
// Blocks and data flow (two clock domains):
//   host --AXI-Lite--> reg_array --> operation sequencer (this module)
//   DDR --axi_rd_dma--> feat_buf                         (op 1: load features)
//   HBM port p --axi_rd_dma[p]--> wbuf_fifo[p] --> vmm_ctrl
//        feat_buf --> vmm_ctrl --> sparse_sel[p] --> gvsa_array --> out_acc
//        out_acc --axi_wr_dma--> DDR                     (op 2: product)
//   DDR --axi_rd_dma--> dual-clock FIFO --> 512-to-256 split
//        --axi_wr_dma--> HBM port KV_PORT                (op 3: K/V copy)
// The HBM-side DMAs run on clk_h (the fast memory clock, 280 MHz in the
// reference system); everything else on clk (140 MHz). Operation starts
// cross into clk_h as toggles through two-flop synchronisers; the addresses
// and lengths they use are held in clk-domain registers that stay constant
// while an operation runs (quasi-static), and the K/V copy's completion comes
// back as a toggle.
//
// One operation runs at a time, started by writing CTRL; STATUS.done rises
// when its last result is in memory. The product operation computes NOBLK
// blocks of NPORT output channels for one token; each block needs NSTEP
// packages of 2048 input channels (FP16xINT4) or NSTEP 32-channel steps of
// one query against NPORT cached keys (FP16xFP16).
//
// What follows the paper: the set of blocks, the 32 HBM ports with 256-bit
// beats feeding 32 vector PEs of 128 lanes (4096 FP16xINT4 or 1024 FP16xFP16
// products per cycle), the weight package, the two clock domains, the K/V
// write path to HBM and the T_out-wide DDR data layout. This design's
// choices: the register map and operation codes, one shared DDR read engine,
// a single K/V write engine steered to one port per copy, and the sizes of
// buffers and FIFOs. The nonlinear operators (norms, softmax, activation,
// rotary embedding) are not part of this RTL.
module edgellm_top
  import edgellm_pkg::*;
#(
  parameter int unsigned TIN      = 128,
  parameter int unsigned NPORT    = 32,
  parameter int unsigned NGROUP   = 2,
  parameter int unsigned ROWS     = 128,
  parameter int unsigned WDEPTH   = 128,
  parameter int unsigned HAW      = 33,    // HBM address width (8 GB)
  parameter int unsigned DAW      = 32     // DDR address width
) (
  input  logic clk,
  input  logic rst_n,
  input  logic clk_h,
  input  logic rst_h_n,
  // host register access (AXI4-Lite)
  input  logic        s_awvalid,
  output logic        s_awready,
  input  logic [7:0]  s_awaddr,
  input  logic        s_wvalid,
  output logic        s_wready,
  input  logic [31:0] s_wdata,
  output logic        s_bvalid,
  input  logic        s_bready,
  output logic [1:0]  s_bresp,
  input  logic        s_arvalid,
  output logic        s_arready,
  input  logic [7:0]  s_araddr,
  output logic        s_rvalid,
  input  logic        s_rready,
  output logic [31:0] s_rdata,
  output logic [1:0]  s_rresp,
  // DDR (AXI4 master, NPORT*16-bit beats)
  output logic              ddr_arvalid,
  input  logic              ddr_arready,
  output logic [DAW-1:0]    ddr_araddr,
  output logic [7:0]        ddr_arlen,
  output logic [2:0]        ddr_arsize,
  output logic [1:0]        ddr_arburst,
  input  logic              ddr_rvalid,
  output logic              ddr_rready,
  input  logic [NPORT*16-1:0] ddr_rdata,
  input  logic              ddr_rlast,
  input  logic [1:0]        ddr_rresp,
  output logic              ddr_awvalid,
  input  logic              ddr_awready,
  output logic [DAW-1:0]    ddr_awaddr,
  output logic [7:0]        ddr_awlen,
  output logic [2:0]        ddr_awsize,
  output logic [1:0]        ddr_awburst,
  output logic              ddr_wvalid,
  input  logic              ddr_wready,
  output logic [NPORT*16-1:0] ddr_wdata,
  output logic [NPORT*2-1:0]  ddr_wstrb,
  output logic              ddr_wlast,
  input  logic              ddr_bvalid,
  output logic              ddr_bready,
  input  logic [1:0]        ddr_bresp,
  // HBM (NPORT AXI4 masters, 256-bit beats, clk_h)
  output logic [NPORT-1:0]            hbm_arvalid,
  input  logic [NPORT-1:0]            hbm_arready,
  output logic [NPORT-1:0][HAW-1:0]   hbm_araddr,
  output logic [NPORT-1:0][7:0]       hbm_arlen,
  output logic [NPORT-1:0][2:0]       hbm_arsize,
  output logic [NPORT-1:0][1:0]       hbm_arburst,
  input  logic [NPORT-1:0]            hbm_rvalid,
  output logic [NPORT-1:0]            hbm_rready,
  input  logic [NPORT-1:0][255:0]     hbm_rdata,
  input  logic [NPORT-1:0]            hbm_rlast,
  input  logic [NPORT-1:0][1:0]       hbm_rresp,
  output logic [NPORT-1:0]            hbm_awvalid,
  input  logic [NPORT-1:0]            hbm_awready,
  output logic [NPORT-1:0][HAW-1:0]   hbm_awaddr,
  output logic [NPORT-1:0][7:0]       hbm_awlen,
  output logic [NPORT-1:0][2:0]       hbm_awsize,
  output logic [NPORT-1:0][1:0]       hbm_awburst,
  output logic [NPORT-1:0]            hbm_wvalid,
  input  logic [NPORT-1:0]            hbm_wready,
  output logic [NPORT-1:0][255:0]     hbm_wdata,
  output logic [NPORT-1:0][31:0]      hbm_wstrb,
  output logic [NPORT-1:0]            hbm_wlast,
  input  logic [NPORT-1:0]            hbm_bvalid,
  output logic [NPORT-1:0]            hbm_bready,
  input  logic [NPORT-1:0][1:0]       hbm_bresp
);
  localparam int unsigned DDW = NPORT * 16;          // DDR beat = T_out FP16
  localparam int unsigned RA  = $clog2(ROWS);
  localparam int unsigned QPR = TIN * 16 / DDW;      // DDR beats per feature row
  localparam int unsigned QW_W = $clog2(QPR > 1 ? QPR : 2);  // width of the quarter select
  localparam int unsigned CW  = $clog2(WDEPTH) + 1;

  typedef enum logic [2:0] {OP_NONE = 3'd0, OP_LOAD = 3'd1, OP_VMM = 3'd2, OP_KV = 3'd3} op_e;
  typedef enum logic [1:0] {T_IDLE, T_RUN, T_DONE} top_state_e;

  // ---------------------------------------------------------------- registers
  logic        start;
  logic [2:0]  op;
  logic [31:0] cfg [13];
  logic        busy, op_done;
  logic [31:0] cycles;

  reg_array u_regs (
    .clk, .rst_n,
    .s_awvalid, .s_awready, .s_awaddr, .s_wvalid, .s_wready, .s_wdata,
    .s_bvalid, .s_bready, .s_bresp, .s_arvalid, .s_arready, .s_araddr,
    .s_rvalid, .s_rready, .s_rdata, .s_rresp,
    .start, .op, .cfg, .busy, .done(op_done), .cycles
  );

  pe_mode_e    c_mode;
  logic [1:0]  c_log2r;
  mask_enc_e   c_enc;
  logic [15:0] c_nstep, c_noblk, c_scale;
  assign c_mode  = pe_mode_e'(cfg[2][0]);
  assign c_log2r = cfg[2][2:1];
  assign c_enc   = mask_enc_e'(cfg[2][3]);
  assign c_nstep = cfg[3][15:0];
  assign c_noblk = cfg[4][15:0];
  assign c_scale = cfg[5][15:0];

  // ---------------------------------------------------------------- operation sequencer
  top_state_e tstate;
  op_e        cur_op;
  logic       ddr_rd_start, ddr_rd_busy, ddr_rd_done;
  logic       ddr_wr_start, ddr_wr_busy, ddr_wr_done;
  logic       vmm_start, vmm_busy, vmm_done, out_clear;
  logic       hbm_go_t, kv_go_t;
  logic       kv_done_c;
  logic [31:0] port_beats;
  logic       vmm_fin, wr_fin;

  // beats each HBM port streams for one product
  logic [5:0] pkg_beats;
  always_comb begin
    logic [5:0] nm;
    if (c_log2r == 2'd0)        nm = 6'd0;
    else if (c_enc == ENC_ONEHOT) nm = 6'd8;
    else                        nm = 6'(24 >> c_log2r);
    pkg_beats = 6'd1 + nm + 6'(32 >> c_log2r);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      tstate <= T_IDLE; cur_op <= OP_NONE; busy <= 1'b0; op_done <= 1'b0; cycles <= '0;
      ddr_rd_start <= 1'b0; ddr_wr_start <= 1'b0; vmm_start <= 1'b0; out_clear <= 1'b0;
      hbm_go_t <= 1'b0; kv_go_t <= 1'b0; port_beats <= '0; vmm_fin <= 1'b0; wr_fin <= 1'b0;
    end else begin
      ddr_rd_start <= 1'b0; ddr_wr_start <= 1'b0; vmm_start <= 1'b0; out_clear <= 1'b0;
      op_done <= 1'b0;
      case (tstate)
        T_IDLE: if (start && op_e'(op) != OP_NONE) begin
          cur_op <= op_e'(op);
          busy   <= 1'b1;
          cycles <= '0;
          vmm_fin <= 1'b0; wr_fin <= 1'b0;
          tstate <= T_RUN;
          case (op_e'(op))
            OP_LOAD: ddr_rd_start <= 1'b1;
            OP_VMM: begin
              port_beats <= (c_mode == MODE_FP16xINT4)
                          ? 32'(c_noblk) * 32'(c_nstep) * 32'(pkg_beats)
                          : 32'(c_noblk) * 32'(c_nstep) * 32'd2;
              hbm_go_t     <= ~hbm_go_t;
              vmm_start    <= 1'b1;
              ddr_wr_start <= 1'b1;
              out_clear    <= 1'b1;
            end
            OP_KV: begin
              ddr_rd_start <= 1'b1;
              kv_go_t      <= ~kv_go_t;
            end
            default: ;
          endcase
        end
        T_RUN: begin
          cycles <= cycles + 1;
          if (vmm_done)    vmm_fin <= 1'b1;
          if (ddr_wr_done) wr_fin  <= 1'b1;
          if ((cur_op == OP_LOAD && ddr_rd_done) ||
              (cur_op == OP_VMM && (vmm_fin || vmm_done) && (wr_fin || ddr_wr_done)) ||
              (cur_op == OP_KV && kv_done_c))
            tstate <= T_DONE;
        end
        T_DONE: begin busy <= 1'b0; op_done <= 1'b1; tstate <= T_IDLE; end
        default: tstate <= T_IDLE;
      endcase
    end
  end

  // ---------------------------------------------------------------- DDR read: features or K/V source
  logic           drd_v, drd_r;
  logic [DDW-1:0] drd_d;

  axi_rd_dma #(.DW(DDW), .AW(DAW)) u_ddr_rd (
    .clk, .rst_n, .start(ddr_rd_start), .addr(DAW'(cfg[6])), .nbeats(cfg[8]),
    .busy(ddr_rd_busy), .done(ddr_rd_done),
    .arvalid(ddr_arvalid), .arready(ddr_arready), .araddr(ddr_araddr), .arlen(ddr_arlen),
    .arsize(ddr_arsize), .arburst(ddr_arburst), .rvalid(ddr_rvalid), .rready(ddr_rready),
    .rdata(ddr_rdata), .rlast(ddr_rlast), .rresp(ddr_rresp),
    .ovalid(drd_v), .oready(drd_r), .odata(drd_d)
  );

  // feature load: beat n goes to row FEAT_ROW + n / QPR, beat n mod QPR of the row
  logic [31:0] ld_cnt;
  logic        fb_wr_en;
  logic        kv_in_ready;
  assign fb_wr_en = drd_v && (cur_op == OP_LOAD);
  assign drd_r    = (cur_op == OP_LOAD) ? 1'b1 : kv_in_ready;

  always_ff @(posedge clk) begin
    if (!rst_n || ddr_rd_start) ld_cnt <= '0;
    else if (fb_wr_en) ld_cnt <= ld_cnt + 1;
  end

  logic                fb_rd_en;
  logic [RA-1:0]       fb_rd_row;
  logic [8*TIN*16-1:0] fb_rd_data;

  feat_buf #(.TIN(TIN), .QW(DDW), .ROWS(ROWS)) u_fbuf (
    .clk,
    .wr_en  (fb_wr_en),
    .wr_row (RA'(cfg[12]) + RA'(ld_cnt / QPR)),
    .wr_q   (QW_W'(ld_cnt % QPR)),
    .wr_data(drd_d),
    .rd_en  (fb_rd_en),
    .rd_row (fb_rd_row),
    .rd_data(fb_rd_data)
  );

  // ---------------------------------------------------------------- HBM clock domain
  logic [2:0] hbm_go_s, kv_go_s;
  logic       hbm_start_h, kv_start_h;
  always_ff @(posedge clk_h) begin
    if (!rst_h_n) begin hbm_go_s <= '0; kv_go_s <= '0; end
    else begin hbm_go_s <= {hbm_go_s[1:0], hbm_go_t}; kv_go_s <= {kv_go_s[1:0], kv_go_t}; end
  end
  assign hbm_start_h = hbm_go_s[2] ^ hbm_go_s[1];
  assign kv_start_h  = kv_go_s[2] ^ kv_go_s[1];

  logic [NPORT-1:0]          wf_v, wf_r;
  logic [NPORT-1:0][255:0]   wf_d;
  logic [NPORT-1:0][CW-1:0]  rcount;
  logic [NPORT-1:0][255:0]   rdata0, rdata1;
  logic [1:0]                pop;

  for (genvar p = 0; p < NPORT; p++) begin : g_port
    logic b_unused, d_unused;
    axi_rd_dma #(.DW(256), .AW(HAW)) u_hbm_rd (
      .clk(clk_h), .rst_n(rst_h_n), .start(hbm_start_h), .addr(HAW'(cfg[9])), .nbeats(port_beats),
      .busy(b_unused), .done(d_unused),
      .arvalid(hbm_arvalid[p]), .arready(hbm_arready[p]), .araddr(hbm_araddr[p]),
      .arlen(hbm_arlen[p]), .arsize(hbm_arsize[p]), .arburst(hbm_arburst[p]),
      .rvalid(hbm_rvalid[p]), .rready(hbm_rready[p]), .rdata(hbm_rdata[p]),
      .rlast(hbm_rlast[p]), .rresp(hbm_rresp[p]),
      .ovalid(wf_v[p]), .oready(wf_r[p]), .odata(wf_d[p])
    );
    wbuf_fifo #(.DW(256), .DEPTH(WDEPTH)) u_wbuf (
      .wclk(clk_h), .wrst_n(rst_h_n), .wvalid(wf_v[p]), .wready(wf_r[p]), .wdata(wf_d[p]),
      .rclk(clk), .rrst_n(rst_n), .rcount(rcount[p]), .rdata0(rdata0[p]), .rdata1(rdata1[p]),
      .pop(pop)
    );
  end

  // K/V copy: DDR beats cross into clk_h, are split into two HBM beats and
  // written to port KV_PORT
  logic [$clog2(16):0] kq_cnt;
  logic [DDW-1:0]      kq_d0, kq_d1;
  logic [1:0]          kq_pop;
  logic                kv_w_v, kv_w_r, kv_half;
  logic [255:0]        kv_w_d;
  logic                kv_busy_h, kv_done_h;

  wbuf_fifo #(.DW(DDW), .DEPTH(16)) u_kv_cdc (
    .wclk(clk), .wrst_n(rst_n), .wvalid(drd_v && cur_op == OP_KV), .wready(kv_in_ready), .wdata(drd_d),
    .rclk(clk_h), .rrst_n(rst_h_n), .rcount(kq_cnt), .rdata0(kq_d0), .rdata1(kq_d1), .pop(kq_pop)
  );
  logic [DDW-1:0] kq_unused;
  assign kq_unused = kq_d1;

  assign kv_w_v = (kq_cnt != 0);
  assign kv_w_d = kq_d0[256*kv_half +: 256];
  assign kq_pop = (kv_w_v && kv_w_r && kv_half == 1'(DDW / 256 - 1)) ? 2'd1 : 2'd0;
  always_ff @(posedge clk_h) begin
    if (!rst_h_n)              kv_half <= 1'b0;
    else if (kv_w_v && kv_w_r) kv_half <= kv_half + 1'b1;
  end

  logic              kw_awvalid, kw_awready, kw_wvalid, kw_wready, kw_wlast, kw_bvalid, kw_bready;
  logic [HAW-1:0]    kw_awaddr;
  logic [7:0]        kw_awlen;
  logic [2:0]        kw_awsize;
  logic [1:0]        kw_awburst, kw_bresp;
  logic [255:0]      kw_wdata;
  logic [31:0]       kw_wstrb;
  logic [4:0]        kv_port;
  assign kv_port = cfg[10][4:0];

  axi_wr_dma #(.DW(256), .AW(HAW)) u_kv_wr (
    .clk(clk_h), .rst_n(rst_h_n), .start(kv_start_h), .addr(HAW'(cfg[11])),
    .nbeats(cfg[8] * (DDW / 256)), .busy(kv_busy_h), .done(kv_done_h),
    .ivalid(kv_w_v), .iready(kv_w_r), .idata(kv_w_d),
    .awvalid(kw_awvalid), .awready(kw_awready), .awaddr(kw_awaddr), .awlen(kw_awlen),
    .awsize(kw_awsize), .awburst(kw_awburst), .wvalid(kw_wvalid), .wready(kw_wready),
    .wdata(kw_wdata), .wstrb(kw_wstrb), .wlast(kw_wlast), .bvalid(kw_bvalid),
    .bready(kw_bready), .bresp(kw_bresp)
  );

  always_comb begin
    for (int p = 0; p < NPORT; p++) begin
      logic sel;
      sel = (5'(p) == kv_port);
      hbm_awvalid[p] = sel && kw_awvalid;
      hbm_awaddr[p]  = kw_awaddr;
      hbm_awlen[p]   = kw_awlen;
      hbm_awsize[p]  = kw_awsize;
      hbm_awburst[p] = kw_awburst;
      hbm_wvalid[p]  = sel && kw_wvalid;
      hbm_wdata[p]   = kw_wdata;
      hbm_wstrb[p]   = kw_wstrb;
      hbm_wlast[p]   = kw_wlast;
      hbm_bready[p]  = sel ? kw_bready : 1'b1;
    end
    kw_awready = hbm_awready[kv_port];
    kw_wready  = hbm_wready[kv_port];
    kw_bvalid  = hbm_bvalid[kv_port];
    kw_bresp   = hbm_bresp[kv_port];
  end

  // completion of the copy back into clk
  logic       kv_done_t;
  logic [2:0] kv_done_s;
  always_ff @(posedge clk_h) begin
    if (!rst_h_n)       kv_done_t <= 1'b0;
    else if (kv_done_h) kv_done_t <= ~kv_done_t;
  end
  always_ff @(posedge clk) begin
    if (!rst_n) kv_done_s <= '0;
    else        kv_done_s <= {kv_done_s[1:0], kv_done_t};
  end
  assign kv_done_c = kv_done_s[2] ^ kv_done_s[1];

  // ---------------------------------------------------------------- product engine
  logic                        out_afull;
  logic [31:0]                 stall_cycles;
  logic                        a_valid;
  pe_mode_e                    a_mode;
  logic [1:0]                  a_log2r;
  mask_enc_e                   a_enc;
  logic [8*TIN*16-1:0]         a_win;
  logic [NPORT-1:0][TIN*8-1:0] a_mask_oh;
  logic [NPORT-1:0][TIN*3-1:0] a_mask_addr;
  logic [NPORT-1:0][TIN*4-1:0] a_wt;
  logic [NPORT-1:0][15:0]      a_scale;

  vmm_ctrl #(.TIN(TIN), .NPE(NPORT), .ROWS(ROWS), .CW(CW)) u_ctrl (
    .clk, .rst_n, .start(vmm_start), .mode(c_mode), .log2r(c_log2r), .enc(c_enc),
    .nstep(c_nstep), .noblk(c_noblk), .scale0(c_scale), .feat_row(RA'(cfg[12])),
    .out_afull, .busy(vmm_busy), .done(vmm_done), .stall_cycles,
    .rcount, .rdata0, .rdata1, .pop,
    .fb_rd_en, .fb_rd_row, .fb_rd_data,
    .a_valid, .a_mode, .a_log2r, .a_enc, .a_win, .a_mask_oh, .a_mask_addr, .a_wt, .a_scale
  );

  logic [NPORT-1:0][TIN*16-1:0] sel_dat;
  for (genvar p = 0; p < NPORT; p++) begin : g_sparse
    sparse_sel #(.TIN(TIN), .MAXR(8)) u_sel (
      .log2r(a_log2r), .enc(a_enc), .win(a_win), .mask_oh(a_mask_oh[p]),
      .mask_addr(a_mask_addr[p]), .sel(sel_dat[p])
    );
  end

  logic                   res_valid;
  logic [NPORT-1:0][15:0] res;

  gvsa_array #(.TIN(TIN), .NPE(NPORT), .NGROUP(NGROUP)) u_array (
    .clk, .rst_n, .in_valid(a_valid), .mode(a_mode), .dat(sel_dat), .wt(a_wt),
    .scale(a_scale), .res_valid, .res
  );

  logic           o_v, o_r;
  logic [DDW-1:0] o_d;

  out_acc #(.NPE(NPORT), .DEPTH(32)) u_out (
    .clk, .rst_n, .clear(out_clear),
    .nsteps((c_mode == MODE_FP16xINT4) ? 16'(c_nstep * 16'(16 >> c_log2r)) : c_nstep),
    .in_valid(res_valid), .in_res(res), .afull(out_afull),
    .ovalid(o_v), .oready(o_r), .odata(o_d)
  );

  axi_wr_dma #(.DW(DDW), .AW(DAW)) u_ddr_wr (
    .clk, .rst_n, .start(ddr_wr_start), .addr(DAW'(cfg[7])), .nbeats(32'(c_noblk)),
    .busy(ddr_wr_busy), .done(ddr_wr_done),
    .ivalid(o_v), .iready(o_r), .idata(o_d),
    .awvalid(ddr_awvalid), .awready(ddr_awready), .awaddr(ddr_awaddr), .awlen(ddr_awlen),
    .awsize(ddr_awsize), .awburst(ddr_awburst), .wvalid(ddr_wvalid), .wready(ddr_wready),
    .wdata(ddr_wdata), .wstrb(ddr_wstrb), .wlast(ddr_wlast), .bvalid(ddr_bvalid),
    .bready(ddr_bready), .bresp(ddr_bresp)
  );

endmodule
