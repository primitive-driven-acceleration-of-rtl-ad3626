// tb_class_hv_buffer: loads every (class, segment) word with random bits and
// reads them back in random order, checking data and the one-cycle latency.
module tb_class_hv_buffer;
  localparam int N_CLASSES = 5, D = 40, P_D = 16;
  localparam int N_SEG = (D + P_D - 1) / P_D;
  localparam int CLS_W = $clog2(N_CLASSES), SEGI_W = $clog2(N_SEG);

  logic clk = 0;
  always #5 clk = ~clk;

  logic              wr_en;
  logic [CLS_W-1:0]  wr_class, rd_class;
  logic [SEGI_W-1:0] wr_seg, rd_seg;
  logic [P_D-1:0]    wr_data, rd_data;

  class_hv_buffer #(.N_CLASSES(N_CLASSES), .D(D), .P_D(P_D)) dut (.*);

  int checks = 0, failures = 0;
  logic [P_D-1:0] shadow [N_CLASSES][N_SEG];

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; wr_class = '0; wr_seg = '0; wr_data = '0; rd_class = '0; rd_seg = '0;
    @(negedge clk);
    for (int c = 0; c < N_CLASSES; c++)
      for (int s = 0; s < N_SEG; s++) begin
        wr_en = 1; wr_class = CLS_W'(c); wr_seg = SEGI_W'(s); wr_data = P_D'($urandom);
        shadow[c][s] = wr_data;
        @(negedge clk);
      end
    wr_en = 0;
    for (int n = 0; n < 200; n++) begin
      int c, s;
      c = $urandom_range(0, N_CLASSES - 1);
      s = $urandom_range(0, N_SEG - 1);
      rd_class = CLS_W'(c); rd_seg = SEGI_W'(s);
      @(negedge clk);
      checks++;
      if (rd_data !== shadow[c][s]) begin
        failures++;
        if (failures < 10) $display("class %0d seg %0d: got %h exp %h", c, s, rd_data, shadow[c][s]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
