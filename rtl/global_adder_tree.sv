// global_adder_tree: bundles the patch hypervector segments of the whole
// processor array into one segment of the image hypervector.
//
// Every time the patch processors emit (one set of P_PATCH rotated patch
// segments for one patch group), a binary adder tree sums them lane by lane
// over P_D lanes. The tree is fully pipelined: one register per level,
// log2(P_PATCH) levels, so it accepts a new set every cycle. Behind the tree
// a segment accumulator adds the results of the successive patch groups of
// the same segment (grp_first clears it). When the last group has been added
// the segment is complete: out_sum carries the bundled sum and out_bits its
// bipolar binarization (bit k = 1 for +1 when sum >= 0, else 0 for -1).
//
// Interface and timing: in_valid with in_ctl (grp_first, grp_last, seg) and
// in_seg. out_valid pulses log2(P_PATCH)+1 cycles after the in_valid of the
// last group of a segment.
//
// The tree and its one-set-per-cycle pipelining follow the paper; the
// accumulation across patch groups at the tree output and the placement of
// the sign step here are this design's choice.
module global_adder_tree
  import hdc_pkg::*;
#(
  parameter int unsigned P_PATCH     = 16,
  parameter int unsigned P_D         = 256,
  parameter int unsigned PACC_W      = 20,
  parameter int unsigned NUM_PATCHES = 100,
  parameter int unsigned GACC_W      = PACC_W + $clog2(NUM_PATCHES)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  issue_t                   in_ctl,
  input  logic signed [PACC_W-1:0] in_seg   [P_PATCH][P_D],
  output logic                     out_valid,
  output logic [SEG_W-1:0]         out_seg_idx,
  output logic signed [GACC_W-1:0] out_sum  [P_D],
  output logic [P_D-1:0]           out_bits
);

  localparam int unsigned LV  = (P_PATCH > 1) ? $clog2(P_PATCH) : 0;
  localparam int unsigned NP2 = 1 << LV;

  logic signed [GACC_W-1:0] lvl   [LV+1][NP2][P_D];
  logic                     vld   [LV+1];
  issue_t                   ctl_q [LV+1];

  always_comb begin
    for (int i = 0; i < NP2; i++)
      for (int k = 0; k < P_D; k++)
        lvl[0][i][k] = (i < P_PATCH) ? GACC_W'(in_seg[i % P_PATCH][k]) : '0;
    vld[0]   = in_valid;
    ctl_q[0] = in_ctl;
  end

  for (genvar l = 0; l < LV; l++) begin : g_lvl
    always_ff @(posedge clk) begin
      for (int i = 0; i < NP2; i++)
        for (int k = 0; k < P_D; k++)
          lvl[l+1][i][k] <= (i < (NP2 >> (l + 1))) ? lvl[l][2*i % NP2][k] + lvl[l][(2*i+1) % NP2][k] : '0;
      ctl_q[l+1] <= ctl_q[l];
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) vld[l+1] <= 1'b0;
      else        vld[l+1] <= vld[l];
    end
  end

  logic signed [GACC_W-1:0] seg_acc  [P_D];
  logic signed [GACC_W-1:0] acc_next [P_D];

  always_comb begin
    for (int k = 0; k < P_D; k++)
      acc_next[k] = (ctl_q[LV].grp_first ? GACC_W'(0) : seg_acc[k]) + lvl[LV][0][k];
  end

  always_ff @(posedge clk) begin
    if (vld[LV]) begin
      for (int k = 0; k < P_D; k++) seg_acc[k] <= acc_next[k];
      if (ctl_q[LV].grp_last) begin
        out_seg_idx <= ctl_q[LV].seg;
        for (int k = 0; k < P_D; k++) begin
          out_sum[k]  <= acc_next[k];
          out_bits[k] <= ~acc_next[k][GACC_W-1];
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= vld[LV] && ctl_q[LV].grp_last;
  end

endmodule
