// tb_argmax_unit: streams score sets (random, many with deliberate ties and
// negative values) into the comparator tree one per cycle and checks the
// winning class, its score and the ceil(log2 N_CLASSES)-cycle latency.
module tb_argmax_unit;
  localparam int N_CLASSES = 10, SCORE_W = 15, CLS_W = $clog2(N_CLASSES);
  localparam int LAT = $clog2(N_CLASSES);
  localparam int N_SETS = 400;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n;

  logic                      in_valid, out_valid;
  logic signed [SCORE_W-1:0] scores [N_CLASSES];
  logic [CLS_W-1:0]          out_class;
  logic signed [SCORE_W-1:0] out_score;

  argmax_unit #(.N_CLASSES(N_CLASSES), .SCORE_W(SCORE_W)) dut (.*);

  int checks = 0, failures = 0;
  int exp_cls [N_SETS], exp_sc [N_SETS], sent_cyc [N_SETS];
  int cyc = 0, n_out = 0;

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && out_valid) begin
    checks += 3;
    if (int'(out_class) != exp_cls[n_out]) begin failures++; $display("set %0d class %0d exp %0d", n_out, out_class, exp_cls[n_out]); end
    if (int'(out_score) != exp_sc[n_out])  begin failures++; $display("set %0d score %0d exp %0d", n_out, out_score, exp_sc[n_out]); end
    if (cyc - sent_cyc[n_out] != LAT)      begin failures++; $display("set %0d latency %0d", n_out, cyc - sent_cyc[n_out]); end
    n_out++;
  end

  initial begin
    rst_n = 0; in_valid = 0;
    foreach (scores[c]) scores[c] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int n = 0; n < N_SETS; n++) begin
      int best, bi;
      for (int c = 0; c < N_CLASSES; c++) begin
        if (n % 3 == 0) scores[c] = SCORE_W'($urandom_range(0, 6) - 3);          // many ties
        else            scores[c] = SCORE_W'($urandom_range(0, 20000) - 10000);
      end
      best = -100000; bi = 0;
      for (int c = 0; c < N_CLASSES; c++)
        if (int'(scores[c]) > best) begin best = int'(scores[c]); bi = c; end
      exp_cls[n] = bi; exp_sc[n] = best; sent_cyc[n] = cyc;
      in_valid = 1;
      @(negedge clk);
    end
    in_valid = 0;
    repeat (LAT + 3) @(negedge clk);
    checks++;
    if (n_out != N_SETS) begin failures++; $display("got %0d results", n_out); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
