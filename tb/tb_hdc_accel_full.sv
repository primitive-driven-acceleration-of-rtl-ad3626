// tb_hdc_accel_full: one complete inference with every parameter of the
// accelerator at its default (32x32 image, 3x3 patches with stride 3 = 100
// patches, 16 patch processors, P_D=256, D=10000, 10 classes).
//
// The image is a random pattern of levels; the class HVs are random except
// class 7, which is set to the reference image HV. The test checks all 10000
// elements of the image HV against the reference encoder, the predicted class
// and score (7 and 10000), and the start-to-result latency of
// (N_SEG+2)*N_GROUPS*M*M = 42*7*9 = 2646 issue cycles plus the pipeline tail.
module tb_hdc_accel_full;
  import hdc_pkg::*;
  import hdc_ref_pkg::*;

  localparam int IMG_H = 32, IMG_W = 32, M = 3, STRIDE = 3, P_PATCH = 16, P_D = 256, D = 10000;
  localparam int BANK_W = 8, LEVEL_W = 8, N_CLASSES = 10, RD_LAT = 2;
  localparam int KH = 10, KW = 10, NG = 7, N_SEG = 40;
  localparam int AW = 10, CLS_W = 4, SEGI_W = 6, SCORE_W = 15;
  localparam int WIN = 7;
  localparam int LATENCY = (N_SEG + 2) * NG * M * M + RD_LAT + 4 + 4 + N_CLASSES + 5;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n;

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

  hdc_accel_top dut (.*);

  hbm_model #(.P_PATCH(P_PATCH), .P_D(P_D), .BANK_W(BANK_W), .RD_LAT(RD_LAT)) u_mem (.*);

  int checks = 0, failures = 0, cyc = 0, n_seg_seen = 0, n_bad_bits = 0;
  int img [];
  bit ref_h [D];

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("%s: got %0d exp %0d", what, got, exp);
    end
  endtask

  always @(negedge clk) if (rst_n && hv_valid) begin
    expect_eq("segment order", int'(hv_seg_idx), n_seg_seen);
    for (int k = 0; k < P_D; k++) begin
      int d;
      d = int'(hv_seg_idx) * P_D + k;
      if (d < D) expect_eq($sformatf("H[%0d]", d), int'(hv_bits[k]), int'(ref_h[d]));
    end
    n_seg_seen++;
  end

  initial begin
    int sc [N_CLASSES];
    int best, bi, t0, n_pos;
    rst_n = 0; start = 0; img_we = 0; img_addr = '0; img_pixel = '0;
    cls_we = 0; cls_class = '0; cls_seg = '0; cls_data = '0;
    img = new[IMG_H * IMG_W];
    repeat (3) @(negedge clk);
    rst_n = 1;
    // a 28x28 "digit-like" blob zero-padded to 32x32
    for (int a = 0; a < IMG_H * IMG_W; a++) begin
      int i, j;
      i = a / IMG_W; j = a % IMG_W;
      img[a] = (i >= 2 && i < 30 && j >= 2 && j < 30 && ((i - 16) * (i - 16) + (j - 16) * (j - 16) < 100))
               ? $urandom_range(128, 255) : 0;
      img_we = 1; img_addr = AW'(a); img_pixel = 8'(img[a]);
      @(negedge clk);
    end
    img_we = 0;
    @(negedge clk);   // quantizer stage
    n_pos = 0;
    for (int d = 0; d < D; d++) begin
      ref_h[d] = ref_hv_sum(d, D, IMG_W, M, STRIDE, KH, KW, img) >= 0;
      n_pos += int'(ref_h[d]);
    end
    $display("reference image HV: %0d of %0d elements are +1", n_pos, D);
    for (int c = 0; c < N_CLASSES; c++) begin
      logic [N_SEG*P_D-1:0] cv;
      sc[c] = 0;
      for (int d = 0; d < N_SEG * P_D; d++) begin
        cv[d] = (c == WIN && d < D) ? ref_h[d] : 1'($urandom);
        if (d < D) sc[c] += (cv[d] == ref_h[d]) ? 1 : -1;
      end
      for (int s = 0; s < N_SEG; s++) begin
        cls_we = 1; cls_class = CLS_W'(c); cls_seg = SEGI_W'(s);
        cls_data = cv[s * P_D +: P_D];
        @(negedge clk);
      end
    end
    cls_we = 0;
    best = -1000000; bi = 0;
    for (int c = 0; c < N_CLASSES; c++) if (sc[c] > best) begin best = sc[c]; bi = c; end
    start = 1; t0 = cyc;
    @(negedge clk);
    start = 0;
    while (!pred_valid) @(negedge clk);
    expect_eq("latency", cyc - t0, LATENCY);
    expect_eq("pred_class", int'(pred_class), WIN);
    expect_eq("pred_score", int'(pred_score), D);
    expect_eq("reference winner", bi, WIN);
    expect_eq("segments", n_seg_seen, N_SEG);
    $display("result: class %0d score %0d after %0d cycles", pred_class, pred_score, cyc - t0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
