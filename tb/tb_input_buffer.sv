// tb_input_buffer: fills the image buffer with random levels, then reads it
// back through all P_PATCH ports at once with random addresses and checks
// every port against a shadow copy, including the one-cycle read latency and
// a write followed immediately by a read of the same pixel.
module tb_input_buffer;
  localparam int IMG_H = 32, IMG_W = 32, LEVEL_W = 8, P_PATCH = 16;
  localparam int AW = $clog2(IMG_H * IMG_W);

  logic clk = 0;
  always #5 clk = ~clk;

  logic               wr_en;
  logic [AW-1:0]      wr_addr;
  logic [LEVEL_W-1:0] wr_level;
  logic [AW-1:0]      rd_addr  [P_PATCH];
  logic [LEVEL_W-1:0] rd_level [P_PATCH];

  input_buffer #(.IMG_H(IMG_H), .IMG_W(IMG_W), .LEVEL_W(LEVEL_W), .P_PATCH(P_PATCH)) dut (.*);

  int checks = 0, failures = 0;
  int shadow [IMG_H*IMG_W];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; wr_addr = '0; wr_level = '0;
    foreach (rd_addr[p]) rd_addr[p] = '0;
    @(negedge clk);
    for (int a = 0; a < IMG_H * IMG_W; a++) begin
      wr_en = 1; wr_addr = AW'(a); wr_level = LEVEL_W'($urandom);
      shadow[a] = int'(wr_level);
      @(negedge clk);
    end
    wr_en = 0;
    for (int n = 0; n < 300; n++) begin
      int exp_l [P_PATCH];
      foreach (rd_addr[p]) begin
        rd_addr[p] = AW'($urandom_range(0, IMG_H * IMG_W - 1));
        exp_l[p]   = shadow[rd_addr[p]];
      end
      @(negedge clk);
      foreach (rd_level[p]) begin
        checks++;
        if (int'(rd_level[p]) != exp_l[p]) begin
          failures++;
          if (failures < 10) $display("port %0d addr %0d: got %0d exp %0d", p, rd_addr[p], rd_level[p], exp_l[p]);
        end
      end
    end
    // overwrite a pixel, read it back on the next cycle
    wr_en = 1; wr_addr = AW'(77); wr_level = 8'hA5; rd_addr[3] = AW'(77);
    @(negedge clk);
    wr_en = 0;
    @(negedge clk);
    checks++;
    if (rd_level[3] != 8'hA5) begin failures++; $display("rewrite not seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
