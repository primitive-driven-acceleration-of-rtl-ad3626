// tb_hdc_accel_top: end-to-end test of the accelerator at reduced sizes.
//
// Configuration: 10x10 image, 2x2 patches with stride 2 (5x5 = 25 patches),
// 4 patch processors (7 patch groups, the last with one active processor and
// three idle slots), P_D=32, D=72 (three segments, the last with 8 valid
// lanes), 5 classes, bank read latency 2. The bank memory is hbm_model.
//
// For each of several random images the test loads the image and a set of
// random class HVs (one class set to the expected image HV, so it must win
// with score D on that image), runs one inference and checks
//   - every image-HV segment against the reference encoder of hdc_ref_pkg,
//   - pred_class / pred_score against a reference argmax of the dot products,
//   - the start-to-result latency against the schedule formula.
// It also counts how often each mechanism of the datapath occurred and fails
// if one never did: warm-up passes, idle processor slots, rotations that
// cross a segment boundary, a segment-0 rotation that reaches back two
// segments (patch ID above the 8 valid lanes of the last segment), masked
// padding lanes in the last segment, a back-to-back start ignored while
// busy, and pixel levels clipped by the quantizer (odd images use a
// non-unit scale and a negative zero-point).
module tb_hdc_accel_top;
  import hdc_pkg::*;
  import hdc_ref_pkg::*;

  localparam int IMG_H = 10, IMG_W = 10, M = 2, STRIDE = 2, P_PATCH = 4, P_D = 32, D = 72;
  localparam int BANK_W = 8, LEVEL_W = 8, N_CLASSES = 5, RD_LAT = 2;
  localparam int KH = (IMG_H - M) / STRIDE + 1, KW = (IMG_W - M) / STRIDE + 1, NP = KH * KW;
  localparam int NG = (NP + P_PATCH - 1) / P_PATCH, N_SEG = (D + P_D - 1) / P_D, V = D - (N_SEG - 1) * P_D;
  localparam int AW = $clog2(IMG_H * IMG_W), CLS_W = $clog2(N_CLASSES), SEGI_W = $clog2(N_SEG);
  localparam int SCORE_W = $clog2(D + 1) + 1;
  localparam int N_IMG = 5;
  localparam int N_ISSUE = (N_SEG + 2) * NG * M * M;
  localparam int LATENCY = N_ISSUE + RD_LAT + $clog2(P_PATCH) + $clog2(N_CLASSES) + N_CLASSES + 5;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n;

  logic                      start, busy, done;
  logic                      img_we;
  logic [AW-1:0]             img_addr;
  logic [7:0]                img_pixel;
  logic [15:0]               q_inv_scale;
  logic signed [15:0]        q_zero_point;
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

  hdc_accel_top #(.IMG_H(IMG_H), .IMG_W(IMG_W), .M(M), .STRIDE(STRIDE), .P_PATCH(P_PATCH),
                  .P_D(P_D), .D(D), .BANK_W(BANK_W), .LEVEL_W(LEVEL_W), .N_CLASSES(N_CLASSES),
                  .RD_LAT(RD_LAT)) dut (.*);

  hbm_model #(.P_PATCH(P_PATCH), .P_D(P_D), .BANK_W(BANK_W), .RD_LAT(RD_LAT)) u_mem (.*);

  int checks = 0, failures = 0, cyc = 0;
  int n_warm = 0, n_idle = 0, n_cross = 0, n_wrap2 = 0, n_mask = 0, n_ignored = 0, n_clip = 0;
  int img [];
  bit ref_h [D];
  int n_seg_seen;

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
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

  // Image-HV segments as they appear.
  always @(negedge clk) if (rst_n && hv_valid) begin
    expect_eq("segment order", int'(hv_seg_idx), n_seg_seen);
    for (int k = 0; k < P_D; k++) begin
      int d;
      d = int'(hv_seg_idx) * P_D + k;
      if (d < D) expect_eq($sformatf("H[%0d]", d), int'(hv_bits[k]), int'(ref_h[d]));
      else n_mask++;
    end
    n_seg_seen++;
  end

  // Mechanism counters, observed inside the datapath.
  always @(negedge clk) if (rst_n) begin
    if (dut.issue_mem.valid && dut.issue_mem.pass != PASS_EMIT) n_warm++;
    if (dut.pp_valid[0]) begin
      for (int p = 0; p < P_PATCH; p++) begin
        int t;
        t = int'(dut.pp_ctl[0].group) * P_PATCH + p;
        if (t >= NP) n_idle++;
        else if (t > 0) n_cross++;
        if (t < NP && dut.pp_ctl[0].seg == 0 && t > V) n_wrap2++;
      end
    end
  end

  initial begin
    rst_n = 0; start = 0; img_we = 0; img_addr = '0; img_pixel = '0; q_inv_scale = 16'h0100; q_zero_point = '0;
    cls_we = 0; cls_class = '0; cls_seg = '0; cls_data = '0;
    img = new[IMG_H * IMG_W];
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int n = 0; n < N_IMG; n++) begin
      int sc [N_CLASSES];
      int best, bi, t0, win;
      // image
      // odd images use a scale of 1/1.5 and zero-point -20, so that levels
      // clip at both ends; even images use s = 1, z = 0
      q_inv_scale  = (n % 2) ? 16'h0180 : 16'h0100;
      q_zero_point = (n % 2) ? -16'sd20 : 16'sd0;
      for (int a = 0; a < IMG_H * IMG_W; a++) begin
        int x, l;
        x = (n == 1) ? 0 : $urandom_range(0, 255);
        l = ((x * int'(q_inv_scale)) >> 8) + int'(q_zero_point);
        if (l < 0) begin l = 0; n_clip++; end
        if (l > 255) begin l = 255; n_clip++; end
        img[a] = l;
        img_we = 1; img_addr = AW'(a); img_pixel = 8'(x);
        @(negedge clk);
      end
      img_we = 0;
      @(negedge clk);   // quantizer stage
      for (int d = 0; d < D; d++) ref_h[d] = ref_hv_sum(d, D, IMG_W, M, STRIDE, KH, KW, img) >= 0;
      // class HVs: random, except class `win`, which is the image HV itself
      win = n % N_CLASSES;
      for (int c = 0; c < N_CLASSES; c++) begin
        logic [D-1:0] cv;
        for (int d = 0; d < D; d++) cv[d] = (c == win) ? ref_h[d] : 1'($urandom);
        sc[c] = 0;
        for (int d = 0; d < D; d++) sc[c] += (cv[d] == ref_h[d]) ? 1 : -1;
        for (int s = 0; s < N_SEG; s++) begin
          cls_we = 1; cls_class = CLS_W'(c); cls_seg = SEGI_W'(s);
          for (int k = 0; k < P_D; k++) cls_data[k] = (s * P_D + k < D) ? cv[s * P_D + k] : 1'($urandom);
          @(negedge clk);
        end
      end
      cls_we = 0;
      best = -1000000; bi = 0;
      for (int c = 0; c < N_CLASSES; c++) if (sc[c] > best) begin best = sc[c]; bi = c; end
      // run
      n_seg_seen = 0;
      start = 1; t0 = cyc;
      @(negedge clk);
      expect_eq("busy", busy, 1);
      start = (n == 2);        // a start pulse while busy must be ignored:
      if (start && busy) n_ignored++;   // the latency check below would catch a restart
      @(negedge clk);
      start = 0;
      while (!pred_valid) @(negedge clk);
      expect_eq("latency", cyc - t0, LATENCY);
      expect_eq("pred_class", int'(pred_class), bi);
      expect_eq("pred_score", int'(pred_score), best);
      expect_eq("winner score", best, D);
      expect_eq("done", done, 1);
      expect_eq("segments", n_seg_seen, N_SEG);
      @(negedge clk);
      expect_eq("idle after", busy, 0);
    end
    $display("mechanisms: warm-up issue cycles=%0d idle slots=%0d boundary rotations=%0d two-segment wraps=%0d masked lanes=%0d ignored starts=%0d clipped levels=%0d",
             n_warm, n_idle, n_cross, n_wrap2, n_mask, n_ignored, n_clip);
    expect_eq("warm-up passes seen", n_warm > 0, 1);
    expect_eq("idle slots seen", n_idle > 0, 1);
    expect_eq("boundary rotations seen", n_cross > 0, 1);
    expect_eq("two-segment wraps seen", n_wrap2 > 0, 1);
    expect_eq("masked lanes seen", n_mask > 0, 1);
    expect_eq("ignored start seen", n_ignored > 0, 1);
    expect_eq("clipped levels seen", n_clip > 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
