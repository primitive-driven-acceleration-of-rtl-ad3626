// tb_global_adder_tree: feeds patch-group results into the adder tree and
// checks the completed image-HV segments.
//
// P_PATCH=5 (a tree padded to 8 leaves, three levels) and P_D=8. Segments of
// 1 to 4 patch groups are sent back to back, one group per cycle with random
// gaps, with random signed inputs (large enough to drive sums both ways). For
// every segment the test checks the lane sums, the sign bits (1 when the sum
// is >= 0, including an all-zero segment), the segment index, and that
// out_valid comes exactly LV+1 cycles after the segment's last group.
module tb_global_adder_tree;
  import hdc_pkg::*;

  localparam int P_PATCH = 5, P_D = 8, PACC_W = 12, NUM_PATCHES = 20;
  localparam int GACC_W = PACC_W + $clog2(NUM_PATCHES);
  localparam int LV = $clog2(P_PATCH);
  localparam int N_SEGS = 60;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n;

  logic                     in_valid, out_valid;
  issue_t                   in_ctl;
  logic signed [PACC_W-1:0] in_seg [P_PATCH][P_D];
  logic [SEG_W-1:0]         out_seg_idx;
  logic signed [GACC_W-1:0] out_sum [P_D];
  logic [P_D-1:0]           out_bits;

  global_adder_tree #(.P_PATCH(P_PATCH), .P_D(P_D), .PACC_W(PACC_W), .NUM_PATCHES(NUM_PATCHES)) dut (.*);

  int checks = 0, failures = 0, cyc = 0, n_out = 0;
  int exp_sum [N_SEGS][P_D];
  int exp_cyc [N_SEGS];

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && out_valid) begin
    checks += 2;
    if (int'(out_seg_idx) != n_out % 64) begin failures++; $display("seg idx %0d exp %0d", out_seg_idx, n_out); end
    if (cyc != exp_cyc[n_out]) begin failures++; $display("seg %0d at cycle %0d exp %0d", n_out, cyc, exp_cyc[n_out]); end
    for (int k = 0; k < P_D; k++) begin
      checks += 2;
      if (int'(out_sum[k]) != exp_sum[n_out][k]) begin
        failures++;
        if (failures < 20) $display("seg %0d lane %0d sum %0d exp %0d", n_out, k, out_sum[k], exp_sum[n_out][k]);
      end
      if (out_bits[k] != (exp_sum[n_out][k] >= 0)) begin failures++; $display("seg %0d lane %0d sign", n_out, k); end
    end
    n_out++;
  end

  initial begin
    rst_n = 0; in_valid = 0; in_ctl = '0;
    foreach (in_seg[p, k]) in_seg[p][k] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int s = 0; s < N_SEGS; s++) begin
      int ng;
      ng = $urandom_range(1, 4);
      for (int k = 0; k < P_D; k++) exp_sum[s][k] = 0;
      for (int g = 0; g < ng; g++) begin
        in_valid = 1;
        in_ctl = '0;
        in_ctl.valid = 1; in_ctl.grp_first = (g == 0); in_ctl.grp_last = (g == ng - 1);
        in_ctl.group = GROUP_W'(g); in_ctl.seg = SEG_W'(s % 64);
        for (int p = 0; p < P_PATCH; p++)
          for (int k = 0; k < P_D; k++) begin
            in_seg[p][k] = (s == 7) ? '0 : PACC_W'($urandom_range(0, 4000) - 2000);
            exp_sum[s][k] += int'(in_seg[p][k]);
          end
        if (g == ng - 1) exp_cyc[s] = cyc + LV + 1;
        @(negedge clk);
        if ($urandom_range(0, 2) == 0) begin
          in_valid = 0;
          foreach (in_seg[p, k]) in_seg[p][k] = PACC_W'($urandom);
          @(negedge clk);
        end
      end
    end
    in_valid = 0;
    repeat (LV + 4) @(negedge clk);
    checks++;
    if (n_out != N_SEGS) begin failures++; $display("got %0d segments", n_out); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
