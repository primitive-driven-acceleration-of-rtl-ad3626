// pixel_quantizer: maps a raw pixel value to one of 2^LEVEL_W intensity
// levels with a scale and zero-point,
//     level = clip( floor(x / s) + z, 0, 2^LEVEL_W - 1 ).
//
// The scale is given as its reciprocal in unsigned fixed point with FRAC_W
// fraction bits (inv_scale = round(2^FRAC_W / s)), so the division becomes a
// multiply and a right shift; the zero-point z is a signed integer. The host
// sets both per image. One register stage: the write strobe and address of
// the pixel are delayed with it, so the quantizer sits in front of the input
// buffer's write port.
//
// Interface and timing: in_valid/in_addr/in_pixel in, out_valid/out_addr/
// out_level one cycle later.
//
// The quantization formula follows the paper (scale--zero-point, clipped to
// L = 256 levels). The fixed-point format of the scale, the integer
// zero-point and the raw pixel width are this design's choice.
module pixel_quantizer #(
  parameter int unsigned PIX_W   = 8,
  parameter int unsigned LEVEL_W = 8,
  parameter int unsigned SCALE_W = 16,
  parameter int unsigned FRAC_W  = 8,
  parameter int unsigned ZP_W    = 16,
  parameter int unsigned ADDR_W  = 10
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [SCALE_W-1:0]     inv_scale,
  input  logic signed [ZP_W-1:0] zero_point,
  input  logic                   in_valid,
  input  logic [ADDR_W-1:0]      in_addr,
  input  logic [PIX_W-1:0]       in_pixel,
  output logic                   out_valid,
  output logic [ADDR_W-1:0]      out_addr,
  output logic [LEVEL_W-1:0]     out_level
);

  localparam int unsigned PROD_W = PIX_W + SCALE_W;
  localparam int unsigned SUM_W  = PROD_W + ZP_W + 2;
  localparam int unsigned LMAX   = (1 << LEVEL_W) - 1;

  logic [PROD_W-1:0]       prod;
  logic signed [SUM_W-1:0] lvl;
  logic [LEVEL_W-1:0]      clipped;

  always_comb begin
    prod = PROD_W'(in_pixel) * PROD_W'(inv_scale);
    lvl  = SUM_W'(prod >> FRAC_W) + SUM_W'(zero_point);
    if (lvl < 0)                  clipped = '0;
    else if (lvl > $signed(SUM_W'(LMAX))) clipped = LEVEL_W'(LMAX);
    else                          clipped = LEVEL_W'(lvl);
  end

  always_ff @(posedge clk) begin
    out_addr  <= in_addr;
    out_level <= clipped;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

endmodule
