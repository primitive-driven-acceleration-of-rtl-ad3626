// tb_patch_processor: drives one patch processor through a complete image
// schedule (two warm-up passes, then every output segment, each with all
// patch groups) and checks every emitted segment against the rotation
// formula out[k] = sum_q B_q[src] * L_q[src], src = (s*P_D + k - t) mod D.
//
// Sizes are small (P_D=16, D=40: three segments, the last with 8 valid lanes)
// and PROC_ID=3 with P_PATCH=4, so the processor serves patches 3, 7, 11 and
// 15. Patches 11 and 15 rotate by more than the 8 valid lanes of the last
// segment, so segment 0 takes elements from two earlier segments; with
// NUM_PATCHES=14 patch 15 is an idle slot that must emit zeros. Bank rows are
// drawn at random per pixel; bank contents come from hdc_ref_pkg::bank_elem.
module tb_patch_processor;
  import hdc_pkg::*;
  import hdc_ref_pkg::*;

  localparam int P_D = 16, D = 40, BANK_W = 8, M = 2, P_PATCH = 4, NUM_PATCHES = 14, PROC_ID = 3;
  localparam int N_SEG = (D + P_D - 1) / P_D, N_GROUPS = (NUM_PATCHES + P_PATCH - 1) / P_PATCH;
  localparam int PACC_W = 2 * BANK_W + $clog2(M * M);

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n;

  issue_t                   ctl, out_ctl;
  logic signed [BANK_W-1:0] base_word [P_D], level_word [P_D];
  logic                     out_valid;
  logic signed [PACC_W-1:0] out_seg [P_D];

  patch_processor #(.P_D(P_D), .D(D), .BANK_W(BANK_W), .M(M), .P_PATCH(P_PATCH),
                    .NUM_PATCHES(NUM_PATCHES), .PROC_ID(PROC_ID)) dut (.*);

  int checks = 0, failures = 0, n_emit = 0;
  int brow [N_GROUPS][M*M], lrow [N_GROUPS][M*M];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_out(int s, int g);
    int t, src, e;
    t = g * P_PATCH + PROC_ID;
    checks++;
    if (!out_valid) begin failures++; $display("no out_valid for seg %0d group %0d", s, g); end
    for (int k = 0; k < P_D; k++) begin
      if (s * P_D + k >= D) continue;
      e = 0;
      if (t < NUM_PATCHES)
        for (int q = 0; q < M * M; q++) begin
          src = (s * P_D + k - t + 4 * D) % D;
          e += bank_elem(0, brow[g][q], src) * bank_elem(1, lrow[g][q], src);
        end
      checks++;
      if (int'(out_seg[k]) != e) begin
        failures++;
        if (failures < 20) $display("seg %0d group %0d (t=%0d) lane %0d: got %0d exp %0d", s, g, t, k, out_seg[k], e);
      end
    end
  endtask

  // Expected-output bookkeeping: an emitting last pixel sampled at a clock
  // edge must produce out_valid and its segment right after that edge.
  logic pend_valid = 0;
  int   pend_s, pend_g;
  always @(posedge clk) begin
    pend_valid <= ctl.valid && ctl.last && ctl.pass == PASS_EMIT;
    pend_s     <= int'(ctl.seg);
    pend_g     <= int'(ctl.group);
  end
  always @(negedge clk) if (rst_n) begin
    checks++;
    if (out_valid != pend_valid) begin failures++; $display("out_valid %0d expected %0d", out_valid, pend_valid); end
    if (pend_valid) begin
      n_emit++;
      check_out(pend_s, pend_g);
    end
  end

  initial begin
    rst_n = 0; ctl = '0;
    foreach (base_word[k]) begin base_word[k] = '0; level_word[k] = '0; end
    for (int g = 0; g < N_GROUPS; g++)
      for (int q = 0; q < M * M; q++) begin
        brow[g][q] = $urandom_range(0, 1023);
        lrow[g][q] = $urandom_range(0, 255);
      end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int pass = 0; pass < N_SEG + 2; pass++) begin
      int s;
      s = (pass == 0) ? N_SEG - 2 : (pass == 1) ? N_SEG - 1 : pass - 2;
      for (int g = 0; g < N_GROUPS; g++) begin
        for (int q = 0; q < M * M; q++) begin
          ctl.valid = 1; ctl.first = (q == 0); ctl.last = (q == M * M - 1);
          ctl.pass = (pass == 0) ? PASS_WARM0 : (pass == 1) ? PASS_WARM1 : PASS_EMIT;
          ctl.group = GROUP_W'(g); ctl.grp_first = (g == 0); ctl.grp_last = (g == N_GROUPS - 1);
          ctl.seg = SEG_W'(s);
          for (int k = 0; k < P_D; k++) begin
            base_word[k]  = BANK_W'(bank_elem(0, brow[g][q], s * P_D + k));
            level_word[k] = BANK_W'(bank_elem(1, lrow[g][q], s * P_D + k));
          end
          @(negedge clk);
          if ($urandom_range(0, 3) == 0) begin   // occasional bubble
            ctl.valid = 0;
            foreach (base_word[k]) base_word[k] = BANK_W'($urandom);
            @(negedge clk);
          end
        end
      end
    end
    ctl.valid = 0;
    repeat (3) @(negedge clk);
    checks++;
    if (n_emit != N_SEG * N_GROUPS) begin failures++; $display("emitted %0d segments", n_emit); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
