// tb_similarity_engine: scores random image hypervectors against random
// class hypervectors, segment by segment, and checks the final dot products.
//
// N_CLASSES=5, P_D=16, D=40: three segments, the last with 8 valid lanes.
// The image and class words carry random bits in the padding lanes beyond D,
// which must not count. A class-buffer model with a one-cycle read answers
// the engine's reads. Several images are scored in a row (segment 0 must
// clear the score buffer), and scores_valid must come N_CLASSES+2 cycles
// after the last segment.
module tb_similarity_engine;
  import hdc_pkg::*;

  localparam int N_CLASSES = 5, P_D = 16, D = 40;
  localparam int N_SEG = (D + P_D - 1) / P_D;
  localparam int CLS_W = $clog2(N_CLASSES), SEGI_W = $clog2(N_SEG), SCORE_W = $clog2(D + 1) + 1;
  localparam int N_IMG = 6, GAP = 9;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n;

  logic                      seg_valid, busy, scores_valid;
  logic [SEG_W-1:0]          seg_idx;
  logic [P_D-1:0]            seg_bits;
  logic [CLS_W-1:0]          cls_rd_class;
  logic [SEGI_W-1:0]         cls_rd_seg;
  logic [P_D-1:0]            cls_rd_data;
  logic signed [SCORE_W-1:0] scores [N_CLASSES];

  similarity_engine #(.N_CLASSES(N_CLASSES), .P_D(P_D), .D(D)) dut (.*);

  logic [P_D-1:0] cls_mem [N_CLASSES][N_SEG];
  always @(posedge clk) cls_rd_data <= cls_mem[int'(cls_rd_class) % N_CLASSES][int'(cls_rd_seg) % N_SEG];

  int checks = 0, failures = 0, cyc = 0, n_done = 0;
  int exp_sc [N_IMG][N_CLASSES];
  int exp_cyc [N_IMG];
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && scores_valid) begin
    checks++;
    if (cyc != exp_cyc[n_done]) begin failures++; $display("image %0d scored at %0d exp %0d", n_done, cyc, exp_cyc[n_done]); end
    for (int c = 0; c < N_CLASSES; c++) begin
      checks++;
      if (int'(scores[c]) != exp_sc[n_done][c]) begin
        failures++;
        $display("image %0d class %0d score %0d exp %0d", n_done, c, scores[c], exp_sc[n_done][c]);
      end
    end
    n_done++;
  end

  initial begin
    rst_n = 0; seg_valid = 0; seg_idx = '0; seg_bits = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < N_IMG; n++) begin
      logic [D-1:0] h;
      logic [D-1:0] cv [N_CLASSES];
      for (int c = 0; c < N_CLASSES; c++) begin
        for (int s = 0; s < N_SEG; s++) cls_mem[c][s] = P_D'($urandom);
        for (int d = 0; d < D; d++) cv[c][d] = cls_mem[c][d / P_D][d % P_D];
      end
      if (n == 2) for (int s = 0; s < N_SEG; s++) cls_mem[1][s] = '1;   // an extreme case
      for (int c = 0; c < N_CLASSES; c++)
        for (int d = 0; d < D; d++) cv[c][d] = cls_mem[c][d / P_D][d % P_D];
      begin
        logic [P_D-1:0] segw [N_SEG];
        for (int s = 0; s < N_SEG; s++) begin
          segw[s] = (n == 2) ? '1 : P_D'($urandom);
          for (int k = 0; k < P_D; k++) if (s * P_D + k < D) h[s * P_D + k] = segw[s][k];
        end
        for (int c = 0; c < N_CLASSES; c++) begin
          exp_sc[n][c] = 0;
          for (int d = 0; d < D; d++) exp_sc[n][c] += (h[d] == cv[c][d]) ? 1 : -1;
        end
        for (int s = 0; s < N_SEG; s++) begin
          seg_valid = 1; seg_idx = SEG_W'(s); seg_bits = segw[s];
          if (s == N_SEG - 1) exp_cyc[n] = cyc + N_CLASSES + 2;
          @(negedge clk);
          seg_valid = 0; seg_bits = P_D'($urandom);
          repeat (GAP) @(negedge clk);
        end
      end
    end
    repeat (N_CLASSES + 4) @(negedge clk);
    checks++;
    if (n_done != N_IMG) begin failures++; $display("scored %0d images", n_done); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
