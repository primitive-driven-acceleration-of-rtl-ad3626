// tb_dataflow_controller: runs the controller at its default sizes (32x32
// image, 3x3 patches with stride 3, 16 processors, D=10000, P_D=256) through
// two images and checks every issue cycle against the nested loops written
// out independently here: pass (two warm-ups on segments N_SEG-2 and N_SEG-1,
// then segments 0..N_SEG-1), patch group, pixel; the pixel position of every
// processor's patch; and the total of (N_SEG+2)*N_GROUPS*M*M issue cycles.
module tb_dataflow_controller;
  import hdc_pkg::*;

  localparam int IMG_H = 32, IMG_W = 32, M = 3, STRIDE = 3, P_PATCH = 16, P_D = 256, D = 10000;
  localparam int AW = $clog2(IMG_H * IMG_W);
  localparam int KW = 10, KH = 10, NP = 100, NG = 7, N_SEG = 40;   // 32x32, 3x3, stride 3

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, start, busy, finished;
  issue_t issue;
  logic [AW-1:0] pix_addr [P_PATCH];

  dataflow_controller #(.IMG_H(IMG_H), .IMG_W(IMG_W), .M(M), .STRIDE(STRIDE),
                        .P_PATCH(P_PATCH), .P_D(P_D), .D(D)) dut (.*);

  int checks = 0, failures = 0;

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

  initial begin
    rst_n = 0; start = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    expect_eq("idle busy", busy, 0);
    for (int img = 0; img < 2; img++) begin
      int n_issue;
      start = 1;
      @(negedge clk);
      start = 0;
      n_issue = 0;
      for (int pass = 0; pass < N_SEG + 2; pass++)
        for (int g = 0; g < NG; g++)
          for (int q = 0; q < M * M; q++) begin
            int seg;
            seg = (pass == 0) ? N_SEG - 2 : (pass == 1) ? N_SEG - 1 : pass - 2;
            expect_eq("valid", issue.valid, 1);
            expect_eq("busy", busy, 1);
            expect_eq("first", issue.first, q == 0);
            expect_eq("last", issue.last, q == M * M - 1);
            expect_eq("pass", int'(issue.pass), pass == 0 ? int'(PASS_WARM0) : pass == 1 ? int'(PASS_WARM1) : int'(PASS_EMIT));
            expect_eq("seg", int'(issue.seg), seg);
            expect_eq("group", int'(issue.group), g);
            expect_eq("grp_first", issue.grp_first, g == 0);
            expect_eq("grp_last", issue.grp_last, g == NG - 1);
            expect_eq("finished", finished, pass == N_SEG + 1 && g == NG - 1 && q == M * M - 1);
            for (int p = 0; p < P_PATCH; p++) begin
              int t;
              t = g * P_PATCH + p;
              if (t < NP)
                expect_eq($sformatf("pix_addr[%0d]", p), int'(pix_addr[p]),
                          ((t / KW) * STRIDE + q / M) * IMG_W + (t % KW) * STRIDE + q % M);
            end
            n_issue++;
            @(negedge clk);
          end
      expect_eq("issue cycles", n_issue, (N_SEG + 2) * NG * M * M);
      expect_eq("busy after", busy, 0);
      expect_eq("valid after", issue.valid, 0);
      repeat (3) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
