// input_buffer: on-chip store of one quantized, zero-padded image.
//
// Holds IMG_H x IMG_W pixel levels (0..2^LEVEL_W-1), written one pixel per
// cycle by the host, and read by all P_PATCH patch processors at once: each
// processor has its own read port, so the whole patch array fetches one pixel
// of each of its patches per cycle. On an FPGA this is a RAM replicated per
// read port.
//
// Interface and timing: wr_en/wr_addr/wr_level write pixel i*IMG_W+j at the
// clock edge. rd_addr[p] is sampled at the clock edge and rd_level[p] holds
// the level from the next cycle on (1-cycle registered read).
//
// The buffer itself (Input Buffer of the accelerator's block diagram) and the
// 32x32 image size follow the paper; the port structure and the read latency
// are this design's choice. Levels are written by pixel_quantizer.
module input_buffer #(
  parameter int unsigned IMG_H   = 32,
  parameter int unsigned IMG_W   = 32,
  parameter int unsigned LEVEL_W = 8,
  parameter int unsigned P_PATCH = 16,
  parameter int unsigned ADDR_W  = $clog2(IMG_H*IMG_W)
) (
  input  logic               clk,
  input  logic               wr_en,
  input  logic [ADDR_W-1:0]  wr_addr,
  input  logic [LEVEL_W-1:0] wr_level,
  input  logic [ADDR_W-1:0]  rd_addr  [P_PATCH],
  output logic [LEVEL_W-1:0] rd_level [P_PATCH]
);

  logic [LEVEL_W-1:0] mem [IMG_H*IMG_W];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_level;
  end

  always_ff @(posedge clk) begin
    for (int p = 0; p < P_PATCH; p++) rd_level[p] <= mem[rd_addr[p]];
  end

endmodule
