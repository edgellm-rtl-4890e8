// reg_array -- AXI4-Lite register array through which the host controls the
// accelerator.
//
// The host writes an operation's configuration, then a start bit; the
// accelerator runs the operation and sets a sticky done bit the host polls.
// Register map (32-bit registers, byte address = 4 * index):
//   0 CTRL      W   bit 0 start (pulse, reads 0); bits 3:1 operation
//                   (1 load features, 2 matrix/vector product, 3 K/V copy)
//   1 STATUS    R   bit 0 busy, bit 1 done (cleared by start)
//   2 CFG       RW  bit 0 PE mode (0 FP16xFP16, 1 FP16xINT4),
//                   bits 2:1 log2 of sparsity ratio R, bit 3 mask encoding
//   3 NSTEP     RW  2048-channel portions (INT4) or 32-channel steps (FP16)
//   4 NOBLK     RW  output blocks of 32 channels
//   5 SCALE     RW  FP16 scale for the FP16xFP16 mode (bits 15:0)
//   6 DDR_SRC   RW  DDR byte address of the source
//   7 DDR_DST   RW  DDR byte address of the result
//   8 NBEATS    RW  beats to load or copy
//   9 HBM_SRC   RW  HBM byte address of the weight / K-V stream (every port)
//  10 KV_PORT   RW  HBM port that receives a K/V copy
//  11 HBM_DST   RW  HBM byte address of a K/V copy
//  12 FEAT_ROW  RW  first feature-buffer row of the operand
//  13 CYCLES    R   clock cycles the last operation took
// The register array and its AXI-Lite link follow the architecture; the map
// is this design's. Single outstanding transaction per channel; writes take
// the address and data in the same or different cycles; responses are OKAY.
module reg_array
(
  input  logic        clk,
  input  logic        rst_n,
  // AXI4-Lite slave
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
  // to the accelerator
  output logic        start,
  output logic [2:0]  op,
  output logic [31:0] cfg [13],
  input  logic        busy,
  input  logic        done,
  input  logic [31:0] cycles
);
  logic        aw_got, w_got;
  logic [7:0]  aw_q;
  logic [31:0] w_q;
  logic        sticky_done;

  assign s_awready = !aw_got && !s_bvalid;
  assign s_wready  = !w_got && !s_bvalid;
  assign s_arready = !s_rvalid;
  assign s_bresp   = 2'b00;
  assign s_rresp   = 2'b00;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      aw_got <= 1'b0; w_got <= 1'b0; s_bvalid <= 1'b0; s_rvalid <= 1'b0;
      start <= 1'b0; op <= '0; sticky_done <= 1'b0; aw_q <= '0; w_q <= '0; s_rdata <= '0;
      for (int i = 0; i < 13; i++) cfg[i] <= '0;
    end else begin
      start <= 1'b0;
      if (s_awvalid && s_awready) begin aw_got <= 1'b1; aw_q <= s_awaddr; end
      if (s_wvalid && s_wready)   begin w_got  <= 1'b1; w_q  <= s_wdata;  end
      if (aw_got && w_got) begin
        aw_got <= 1'b0; w_got <= 1'b0; s_bvalid <= 1'b1;
        if (aw_q[7:2] == 6'd0) begin
          start <= w_q[0];
          op    <= w_q[3:1];
          if (w_q[0]) sticky_done <= 1'b0;
        end else if (aw_q[7:2] < 6'd13 && aw_q[7:2] != 6'd1) begin
          cfg[4'(aw_q[5:2])] <= w_q;
        end
      end
      if (s_bvalid && s_bready) s_bvalid <= 1'b0;
      if (done) sticky_done <= 1'b1;
      if (s_arvalid && s_arready) begin
        s_rvalid <= 1'b1;
        case (s_araddr[7:2])
          6'd0:    s_rdata <= {28'd0, op, 1'b0};
          6'd1:    s_rdata <= {30'd0, sticky_done, busy};
          6'd13:   s_rdata <= cycles;
          default: s_rdata <= (s_araddr[7:2] < 6'd13) ? cfg[4'(s_araddr[5:2])] : 32'd0;
        endcase
      end
      if (s_rvalid && s_rready) s_rvalid <= 1'b0;
    end
  end

endmodule
