// gvsa_array -- grouped vector systolic array (G-VSA) of mix-precision PEs.
//
// NPE vector PEs (mp_vec_pe) are split into NGROUP groups. Instead of the
// fine-grained operand forwarding of a classic systolic array, operands move
// one group per cycle, row by row: group g receives its features, weights and
// scales g cycles after group 0, through one register stage per group hop,
// which keeps fan-out and wiring local. The results of earlier groups are
// delayed so that all NPE results leave together, on res_valid, a fixed
// LAT = 4 + NGROUP - 1 cycles after in_valid.
//
// Each PE has its own feature vector because, with sparse weights, each
// output channel picks its own activations; in dense mode all PEs receive
// the same vector. PE p computes output channel p of the current block of
// NPE channels. The array organisation (grouped vector PEs, row-by-row
// transfer) follows the architecture; the group count and the exact register
// placement are this design's choices.
module gvsa_array
  import edgellm_pkg::*;
#(
  parameter int unsigned TIN    = 128,
  parameter int unsigned NPE    = 32,
  parameter int unsigned NGROUP = 2
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        in_valid,
  input  pe_mode_e                    mode,
  input  logic [NPE-1:0][TIN*16-1:0]  dat,
  input  logic [NPE-1:0][TIN*4-1:0]   wt,
  input  logic [NPE-1:0][15:0]        scale,
  output logic                        res_valid,
  output logic [NPE-1:0][15:0]        res
);
  localparam int unsigned PPG = NPE / NGROUP;
  initial assert (NPE % NGROUP == 0) else $error("NPE must be a multiple of NGROUP");

  // operand pipeline: stage k holds the operands as seen by group k
  logic [NGROUP-1:0]                      v_s;
  pe_mode_e                               m_s   [NGROUP];
  logic [NGROUP-1:0][NPE-1:0][TIN*16-1:0] dat_s;
  logic [NGROUP-1:0][NPE-1:0][TIN*4-1:0]  wt_s;
  logic [NGROUP-1:0][NPE-1:0][15:0]       sc_s;

  assign v_s[0]   = in_valid;
  assign m_s[0]   = mode;
  assign dat_s[0] = dat;
  assign wt_s[0]  = wt;
  assign sc_s[0]  = scale;

  for (genvar g = 1; g < NGROUP; g++) begin : g_hop
    always_ff @(posedge clk) begin
      if (!rst_n) v_s[g] <= 1'b0;
      else        v_s[g] <= v_s[g-1];
      m_s[g] <= m_s[g-1];
      // only the operands of groups g and beyond travel on
      for (int p = g * PPG; p < NPE; p++) begin
        dat_s[g][p] <= dat_s[g-1][p];
        wt_s[g][p]  <= wt_s[g-1][p];
        sc_s[g][p]  <= sc_s[g-1][p];
      end
    end
  end

  logic [NGROUP-1:0]                pv;
  logic [NGROUP-1:0][PPG-1:0][15:0] pr;

  for (genvar g = 0; g < NGROUP; g++) begin : g_grp
    for (genvar i = 0; i < PPG; i++) begin : g_pe
      logic ov;
      mp_vec_pe #(.TIN(TIN)) u_pe (
        .clk, .rst_n,
        .in_valid (v_s[g]),
        .mode     (m_s[g]),
        .dat      (dat_s[g][g*PPG+i]),
        .wt       (wt_s[g][g*PPG+i]),
        .scale    (sc_s[g][g*PPG+i]),
        .out_valid(ov),
        .out      (pr[g][i])
      );
      if (i == 0) begin : g_v
        assign pv[g] = ov;
      end
    end
  end

  // de-skew: group g's results wait NGROUP-1-g cycles
  for (genvar g = 0; g < NGROUP; g++) begin : g_dsk
    localparam int unsigned D = NGROUP - 1 - g;
    logic [D:0]                  vq;
    logic [D:0][PPG-1:0][15:0]   rq;
    assign vq[0] = pv[g];
    assign rq[0] = pr[g];
    for (genvar k = 1; k <= D; k++) begin : g_d
      always_ff @(posedge clk) begin
        if (!rst_n) vq[k] <= 1'b0;
        else        vq[k] <= vq[k-1];
        rq[k] <= rq[k-1];
      end
    end
    for (genvar i = 0; i < PPG; i++) begin : g_o
      assign res[g*PPG+i] = rq[D][i];
    end
    if (g == 0) begin : g_rv
      assign res_valid = vq[D];
    end
  end

endmodule
