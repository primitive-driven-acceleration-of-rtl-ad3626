// argmax_unit: picks the class with the highest similarity score.
//
// A binary tree of comparators, one register per level (ceil(log2 N_CLASSES)
// levels), each node keeping the larger of its two inputs together with its
// class index. On equal scores the left (lower-index) input wins, so ties
// resolve to the lowest class index. Unused leaves hold the most negative
// score. The tree is pipelined: it accepts a new score set every cycle.
//
// Interface and timing: in_valid/scores in, out_valid/out_class/out_score
// out, ceil(log2 N_CLASSES) cycles later.
//
// The pipelined comparator tree follows the paper; the tie rule is this
// design's choice.
module argmax_unit #(
  parameter int unsigned N_CLASSES = 10,
  parameter int unsigned SCORE_W   = 15,
  parameter int unsigned CLS_W     = (N_CLASSES > 1) ? $clog2(N_CLASSES) : 1
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  input  logic signed [SCORE_W-1:0] scores [N_CLASSES],
  output logic                      out_valid,
  output logic [CLS_W-1:0]          out_class,
  output logic signed [SCORE_W-1:0] out_score
);

  localparam int unsigned LV  = (N_CLASSES > 1) ? $clog2(N_CLASSES) : 0;
  localparam int unsigned NP2 = 1 << LV;

  logic signed [SCORE_W-1:0] sc  [LV+1][NP2];
  logic [CLS_W-1:0]          id  [LV+1][NP2];
  logic                      vld [LV+1];

  always_comb begin
    for (int i = 0; i < NP2; i++) begin
      sc[0][i] = (i < N_CLASSES) ? scores[i % N_CLASSES] : {1'b1, {(SCORE_W-1){1'b0}}};
      id[0][i] = CLS_W'(i);
    end
    vld[0] = in_valid;
  end

  for (genvar l = 0; l < LV; l++) begin : g_lvl
    always_ff @(posedge clk) begin
      for (int i = 0; i < NP2; i++) begin
        if (i < (NP2 >> (l + 1))) begin
          if (sc[l][2*i % NP2] >= sc[l][(2*i+1) % NP2]) begin
            sc[l+1][i] <= sc[l][2*i % NP2];
            id[l+1][i] <= id[l][2*i % NP2];
          end else begin
            sc[l+1][i] <= sc[l][(2*i+1) % NP2];
            id[l+1][i] <= id[l][(2*i+1) % NP2];
          end
        end else begin
          sc[l+1][i] <= '0;
          id[l+1][i] <= '0;
        end
      end
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) vld[l+1] <= 1'b0;
      else        vld[l+1] <= vld[l];
    end
  end

  assign out_valid = vld[LV];
  assign out_class = id[LV][0];
  assign out_score = sc[LV][0];

endmodule
