// hdc_config_bench: one complete inference of the accelerator at a given
// patch size M (stride M) and dimension D, with the other sizes at their
// defaults (32x32 image, 16 processors, P_D=256, 10 classes).
//
// It loads a blob-shaped image, random class HVs with class WIN set to the
// reference image HV, runs one inference, and checks every image-HV element
// against hdc_ref_pkg, the predicted class and score (WIN and D) and the
// start-to-result latency. It reports its counts on its ports and raises
// `finished` when done.
module hdc_config_bench
  import hdc_pkg::*;
  import hdc_ref_pkg::*;
#(
  parameter int M   = 3,
  parameter int D   = 10000,
  parameter int WIN = 3
) (
  input  logic clk,
  output int   checks,
  output int   failures,
  output logic finished
);

  localparam int IMG_H = 32, IMG_W = 32, STRIDE = M, P_PATCH = 16, P_D = 256;
  localparam int BANK_W = 8, LEVEL_W = 8, N_CLASSES = 10, RD_LAT = 2;
  localparam int KH = (IMG_H - M) / STRIDE + 1, KW = (IMG_W - M) / STRIDE + 1, NP = KH * KW;
  localparam int NG = (NP + P_PATCH - 1) / P_PATCH, N_SEG = (D + P_D - 1) / P_D;
  localparam int AW = 10, CLS_W = 4, SEGI_W = $clog2(N_SEG), SCORE_W = $clog2(D + 1) + 1;
  localparam int LATENCY = (N_SEG + 2) * NG * M * M + RD_LAT + 4 + 4 + N_CLASSES + 5;

  logic                      rst_n;
  logic                      start, busy, done;
  logic                      img_we;
  logic [AW-1:0]             img_addr;
  logic [7:0]                img_pixel;
  logic [15:0]               q_inv_scale = 16'h0100;   // s = 1
  logic signed [15:0]        q_zero_point = '0;        // z = 0
  logic                      cls_we;
  logic [CLS_W-1:0]          cls_class;
  logic [SEGI_W-1:0]         cls_seg;
  logic [P_D-1:0]            cls_data;
  bank_addr_t                base_addr [P_PATCH], level_addr [P_PATCH];
  logic signed [BANK_W-1:0]  base_rdata [P_PATCH][P_D], level_rdata [P_PATCH][P_D];
  logic                      hv_valid;
  logic [SEG_W-1:0]          hv_seg_idx;
  logic [P_D-1:0]            hv_bits;
  logic                      pred_valid;
  logic [CLS_W-1:0]          pred_class;
  logic signed [SCORE_W-1:0] pred_score;

  hdc_accel_top #(.M(M), .STRIDE(STRIDE), .D(D)) dut (.*);

  hbm_model #(.P_PATCH(P_PATCH), .P_D(P_D), .BANK_W(BANK_W), .RD_LAT(RD_LAT)) u_mem (.*);

  int cyc = 0, n_seg_seen = 0;
  int img [];
  bit ref_h [D];

  always @(posedge clk) cyc <= cyc + 1;

  task automatic expect_eq(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("[M=%0d D=%0d] %s: got %0d exp %0d", M, D, what, got, exp);
    end
  endtask

  always @(negedge clk) if (rst_n && hv_valid) begin
    expect_eq("segment order", int'(hv_seg_idx), n_seg_seen);
    for (int k = 0; k < P_D; k++) begin
      int d;
      d = int'(hv_seg_idx) * P_D + k;
      if (d < D) expect_eq("H element", int'(hv_bits[k]), int'(ref_h[d]));
    end
    n_seg_seen++;
  end

  initial begin
    int t0;
    checks = 0; failures = 0; finished = 0;
    rst_n = 0; start = 0; img_we = 0; img_addr = '0; img_pixel = '0;
    cls_we = 0; cls_class = '0; cls_seg = '0; cls_data = '0;
    img = new[IMG_H * IMG_W];
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int a = 0; a < IMG_H * IMG_W; a++) begin
      int i, j;
      i = a / IMG_W; j = a % IMG_W;
      img[a] = (i >= 2 && i < 30 && j >= 2 && j < 30 && ((i - 14) * (i - 14) + (j - 17) * (j - 17) < 80))
               ? $urandom_range(100, 255) : 0;
      img_we = 1; img_addr = AW'(a); img_pixel = 8'(img[a]);
      @(negedge clk);
    end
    img_we = 0;
    @(negedge clk);   // quantizer stage
    for (int d = 0; d < D; d++) ref_h[d] = ref_hv_sum(d, D, IMG_W, M, STRIDE, KH, KW, img) >= 0;
    for (int c = 0; c < N_CLASSES; c++)
      for (int s = 0; s < N_SEG; s++) begin
        cls_we = 1; cls_class = CLS_W'(c); cls_seg = SEGI_W'(s);
        for (int k = 0; k < P_D; k++)
          cls_data[k] = (c == WIN && s * P_D + k < D) ? ref_h[s * P_D + k] : 1'($urandom);
        @(negedge clk);
      end
    cls_we = 0;
    start = 1; t0 = cyc;
    @(negedge clk);
    start = 0;
    while (!pred_valid) @(negedge clk);
    expect_eq("latency", cyc - t0, LATENCY);
    expect_eq("pred_class", int'(pred_class), WIN);
    expect_eq("pred_score", int'(pred_score), D);
    expect_eq("segments", n_seg_seen, N_SEG);
    $display("[M=%0d D=%0d] %0d patches, class %0d score %0d after %0d cycles",
             M, D, NP, pred_class, pred_score, cyc - t0);
    finished = 1;
  end

endmodule
