// similarity_engine: dot-product similarity of the image hypervector against
// every class hypervector, computed segment by segment as the image HV is
// produced.
//
// For bipolar vectors the product of two elements is +1 when they agree and
// -1 when they differ, so the P_D multiply-accumulate lanes reduce to XNOR
// gates and a population count: the partial dot product of one segment is
// 2*n_match - n_valid, where n_valid is P_D except in the last segment
// (D - (N_SEG-1)*P_D lanes; the rest are masked). When a segment arrives the
// engine reads the same segment of class 0, 1, ... N_CLASSES-1 from the class
// HV buffer, one class per cycle, and adds each partial result to that
// class's entry of the score buffer. Segment 0 clears the buffer; after the
// last segment (N_SEG-1) the buffer holds H^T C_c for every class and
// scores_valid pulses. The 1/D normalisation of cosine similarity is left out:
// it does not change the argmax.
//
// Interface and timing: seg_valid/seg_idx/seg_bits deliver a segment; the
// engine is busy for N_CLASSES+1 cycles and must not receive another segment
// meanwhile (there is no backpressure; the accelerator's schedule spaces
// segments N_GROUPS*M*M cycles apart, and an assertion checks the rule).
// cls_rd_* reads the class buffer, whose data is expected one cycle later.
// scores_valid pulses N_CLASSES+2 cycles after the last segment's seg_valid.
//
// Following the paper: P_D MAC lanes processing one segment at a time
// against every class, and a score buffer with one entry per class. This
// design's choice: classes visited sequentially, XNOR/popcount arithmetic.
module similarity_engine
  import hdc_pkg::*;
#(
  parameter int unsigned N_CLASSES = 10,
  parameter int unsigned P_D       = 256,
  parameter int unsigned D         = 10000,
  parameter int unsigned N_SEG     = (D + P_D - 1) / P_D,
  parameter int unsigned CLS_W     = (N_CLASSES > 1) ? $clog2(N_CLASSES) : 1,
  parameter int unsigned SEGI_W    = (N_SEG > 1) ? $clog2(N_SEG) : 1,
  parameter int unsigned SCORE_W   = $clog2(D + 1) + 1
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      seg_valid,
  input  logic [SEG_W-1:0]          seg_idx,
  input  logic [P_D-1:0]            seg_bits,
  output logic [CLS_W-1:0]          cls_rd_class,
  output logic [SEGI_W-1:0]         cls_rd_seg,
  input  logic [P_D-1:0]            cls_rd_data,
  output logic                      busy,
  output logic                      scores_valid,
  output logic signed [SCORE_W-1:0] scores [N_CLASSES]
);

  localparam int unsigned V = D - (N_SEG - 1) * P_D;

  logic [P_D-1:0]    bits_q;
  logic [SEG_W-1:0]  idx_q;
  logic              issuing;
  logic [CLS_W-1:0]  issue_cls;
  logic              rd_pending;
  logic [CLS_W-1:0]  rd_cls;
  logic [P_D-1:0]    lane_mask;
  logic signed [SCORE_W-1:0] partial;

  assign cls_rd_class = issue_cls;
  assign cls_rd_seg   = SEGI_W'(idx_q);
  assign busy         = issuing || rd_pending;

  always_comb begin
    for (int k = 0; k < P_D; k++)
      lane_mask[k] = (int'(idx_q) * P_D + k) < D;
  end

  // Partial dot product of the current segment with the class word just read.
  always_comb begin
    int unsigned n_match;
    int unsigned n_valid;
    logic agree;
    n_match = 0;
    for (int k = 0; k < P_D; k++) begin
      agree    = lane_mask[k] & (bits_q[k] ~^ cls_rd_data[k]);
      n_match += {31'd0, agree};
    end
    n_valid = (int'(idx_q) == N_SEG - 1) ? V : P_D;
    partial = SCORE_W'(2 * int'(n_match) - int'(n_valid));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      issuing      <= 1'b0;
      issue_cls    <= '0;
      rd_pending   <= 1'b0;
      rd_cls       <= '0;
      scores_valid <= 1'b0;
      idx_q        <= '0;
      bits_q       <= '0;
      for (int c = 0; c < N_CLASSES; c++) scores[c] <= '0;
    end else begin
      scores_valid <= 1'b0;
      rd_pending   <= issuing;
      rd_cls       <= issue_cls;
      if (seg_valid) begin
        bits_q    <= seg_bits;
        idx_q     <= seg_idx;
        issuing   <= 1'b1;
        issue_cls <= '0;
        if (seg_idx == '0)
          for (int c = 0; c < N_CLASSES; c++) scores[c] <= '0;
      end else if (issuing) begin
        if (int'(issue_cls) == N_CLASSES - 1) issuing <= 1'b0;
        else                                  issue_cls <= issue_cls + 1'b1;
      end
      if (rd_pending) begin
        scores[rd_cls] <= scores[rd_cls] + partial;
        if (int'(rd_cls) == N_CLASSES - 1 && int'(idx_q) == N_SEG - 1) scores_valid <= 1'b1;
      end
    end
  end

  // A new segment may only arrive when the previous one has been scored.
  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n) seg_valid |-> !busy)
    else $error("similarity_engine: segment arrived while busy");

endmodule
