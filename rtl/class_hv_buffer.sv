// class_hv_buffer: on-chip store of the bipolar class hypervectors.
//
// N_CLASSES class HVs of D elements each are kept one bit per element
// (1 = +1, 0 = -1), cut into N_SEG = ceil(D/P_D) words of P_D bits. Word
// (class c, segment s) holds elements s*P_D .. s*P_D+P_D-1 of class c, bit k
// being element s*P_D+k; bits beyond D in the last segment are don't-care.
//
// Interface and timing: the host loads words through wr_*; the similarity
// engine reads one word per cycle, rd_data is valid one cycle after
// rd_class/rd_seg (registered read).
//
// The class HV buffer and the bipolar class HVs follow the paper; the word
// layout, the load port and the read latency are this design's choice.
module class_hv_buffer #(
  parameter int unsigned N_CLASSES = 10,
  parameter int unsigned D         = 10000,
  parameter int unsigned P_D       = 256,
  parameter int unsigned N_SEG     = (D + P_D - 1) / P_D,
  parameter int unsigned CLS_W     = (N_CLASSES > 1) ? $clog2(N_CLASSES) : 1,
  parameter int unsigned SEGI_W    = (N_SEG > 1) ? $clog2(N_SEG) : 1
) (
  input  logic              clk,
  input  logic              wr_en,
  input  logic [CLS_W-1:0]  wr_class,
  input  logic [SEGI_W-1:0] wr_seg,
  input  logic [P_D-1:0]    wr_data,
  input  logic [CLS_W-1:0]  rd_class,
  input  logic [SEGI_W-1:0] rd_seg,
  output logic [P_D-1:0]    rd_data
);

  localparam int unsigned DEPTH = N_CLASSES * N_SEG;

  logic [P_D-1:0] mem [DEPTH];

  function automatic int unsigned word_addr(logic [CLS_W-1:0] c, logic [SEGI_W-1:0] s);
    return int'(c) * N_SEG + int'(s);
  endfunction

  always_ff @(posedge clk) begin
    if (wr_en) mem[word_addr(wr_class, wr_seg)] <= wr_data;
    rd_data <= mem[word_addr(rd_class, rd_seg)];
  end

endmodule
