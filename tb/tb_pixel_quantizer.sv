// tb_pixel_quantizer: random raw pixels, reciprocal scales and zero-points
// (including values that clip at 0 and at 255) against
// level = clip(floor(x * inv_scale / 256) + z, 0, 255), with the one-cycle
// latency of the write path.
module tb_pixel_quantizer;
  localparam int PIX_W = 8, LEVEL_W = 8, SCALE_W = 16, FRAC_W = 8, ZP_W = 16, ADDR_W = 10;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n;

  logic [SCALE_W-1:0]     inv_scale;
  logic signed [ZP_W-1:0] zero_point;
  logic                   in_valid, out_valid;
  logic [ADDR_W-1:0]      in_addr, out_addr;
  logic [PIX_W-1:0]       in_pixel;
  logic [LEVEL_W-1:0]     out_level;

  pixel_quantizer #(.PIX_W(PIX_W), .LEVEL_W(LEVEL_W), .SCALE_W(SCALE_W), .FRAC_W(FRAC_W),
                    .ZP_W(ZP_W), .ADDR_W(ADDR_W)) dut (.*);

  int checks = 0, failures = 0, n_lo = 0, n_hi = 0;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; in_valid = 0; in_addr = '0; in_pixel = '0; inv_scale = '0; zero_point = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 1000; n++) begin
      int x, inv, z, e, a;
      x   = $urandom_range(0, 255);
      inv = (n % 4 == 0) ? 256 : $urandom_range(0, 1023);
      z   = (n % 4 == 0) ? 0 : $urandom_range(0, 400) - 200;
      a   = $urandom_range(0, 1023);
      e   = ((x * inv) >> FRAC_W) + z;
      if (e < 0) begin e = 0; n_lo++; end
      if (e > 255) begin e = 255; n_hi++; end
      in_valid = (n % 7 != 3); in_pixel = PIX_W'(x); inv_scale = SCALE_W'(inv);
      zero_point = ZP_W'(z); in_addr = ADDR_W'(a);
      @(negedge clk);
      checks += 2;
      if (out_valid != (n % 7 != 3)) begin failures++; $display("valid wrong at %0d", n); end
      if (int'(out_addr) != a) begin failures++; $display("addr wrong at %0d", n); end
      if (n % 7 != 3) begin
        checks++;
        if (int'(out_level) != e) begin
          failures++;
          if (failures < 10) $display("x=%0d inv=%0d z=%0d: level %0d exp %0d", x, inv, z, out_level, e);
        end
      end
    end
    checks++;
    if (n_lo == 0 || n_hi == 0) begin failures++; $display("clipping not exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
