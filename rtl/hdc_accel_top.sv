// hdc_accel_top: patch-based hyperdimensional image classifier, inference
// datapath.
//
// An image of IMG_H x IMG_W quantized pixels is cut into M x M patches with
// stride STRIDE. Each pixel is encoded by binding (element-wise multiply) the
// base HV of its position with the level HV of its intensity; each patch HV is
// the sum of its pixel HVs rotated by the patch ID; the image HV is the sign
// of the sum of all patch HVs; the predicted class is the class HV with the
// largest dot product. The hypervectors have D elements and are processed in
// N_SEG = ceil(D/P_D) segments of P_D elements.
//
// Blocks and flow (one image):
//   img_* -> pixel_quantizer -> input_buffer (written by the host side)
//   dataflow_controller -> input_buffer (pixel levels, 1 cycle)
//     -> bank read ports (base HV row = pixel position, level HV row =
//        pixel level; data back RD_LAT cycles later, from external memory)
//     -> P_PATCH patch_processors (bind, accumulate, rotate; one segment per
//        patch group)
//     -> global_adder_tree (sum over processors and patch groups, sign)
//     -> similarity_engine + class_hv_buffer (running dot products)
//     -> argmax_unit -> pred_class.
// The control record of each issued pixel travels through delay_line stages
// so that it reaches the processors together with its bank data.
//
// Interface: load the image through img_* (one raw pixel per cycle, address
// i*IMG_W+j; pixel_quantizer turns it into a level with the scale and
// zero-point on q_inv_scale/q_zero_point and writes it one cycle later) and
// the class HVs through cls_* (one P_D-bit word per cycle,
// bit = 1 for +1), then pulse start. busy stays high until done pulses with
// pred_class/pred_score valid. hv_valid/hv_seg_idx/hv_bits show each image-HV
// segment as it is completed. The bank memory is outside: for every patch
// processor p the top presents base_addr[p] and level_addr[p] each cycle and
// expects the addressed P_D-element words on base_rdata[p] / level_rdata[p]
// exactly RD_LAT cycles later (fixed latency, no flow control).
//
// Timing: (N_SEG+2)*N_GROUPS*M*M issue cycles per image (2646 at the default
// sizes) plus a pipeline tail of 1 + 1 + RD_LAT + 1 + log2(P_PATCH) + 1
// cycles to the last image-HV segment and N_CLASSES + 2 + ceil(log2
// N_CLASSES) cycles more to the result.
//
// The block structure (input buffer, device memory holding base and level
// HVs, patch processor array, global adder tree, similarity engine with class
// HV buffer, argmax unit) and the default sizes follow the paper. The fixed
// memory latency, the fixed-point bank format and the warm-up passes are this
// design's choices.
module hdc_accel_top
  import hdc_pkg::*;
#(
  parameter int unsigned IMG_H     = 32,
  parameter int unsigned IMG_W     = 32,
  parameter int unsigned M         = 3,
  parameter int unsigned STRIDE    = 3,
  parameter int unsigned P_PATCH   = 16,
  parameter int unsigned P_D       = 256,
  parameter int unsigned D         = 10000,
  parameter int unsigned BANK_W    = 8,
  parameter int unsigned LEVEL_W   = 8,
  parameter int unsigned PIX_W     = 8,
  parameter int unsigned N_CLASSES = 10,
  parameter int unsigned RD_LAT    = 2,
  // derived, not meant to be overridden
  parameter int unsigned ADDR_W    = $clog2(IMG_H * IMG_W),
  parameter int unsigned N_SEG     = (D + P_D - 1) / P_D,
  parameter int unsigned CLS_W     = (N_CLASSES > 1) ? $clog2(N_CLASSES) : 1,
  parameter int unsigned SEGI_W    = (N_SEG > 1) ? $clog2(N_SEG) : 1,
  parameter int unsigned SCORE_W   = $clog2(D + 1) + 1
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // control
  input  logic                      start,
  output logic                      busy,
  output logic                      done,
  // image load: raw pixels, quantized on the way into the input buffer
  input  logic                      img_we,
  input  logic [ADDR_W-1:0]         img_addr,
  input  logic [PIX_W-1:0]          img_pixel,
  input  logic [15:0]               q_inv_scale,   // 2^8 / s, unsigned Q8.8
  input  logic signed [15:0]        q_zero_point,  // z, integer
  // class HV load
  input  logic                      cls_we,
  input  logic [CLS_W-1:0]          cls_class,
  input  logic [SEGI_W-1:0]         cls_seg,
  input  logic [P_D-1:0]            cls_data,
  // bank memory (base and level HVs)
  output bank_addr_t                base_addr   [P_PATCH],
  output bank_addr_t                level_addr  [P_PATCH],
  input  logic signed [BANK_W-1:0]  base_rdata  [P_PATCH][P_D],
  input  logic signed [BANK_W-1:0]  level_rdata [P_PATCH][P_D],
  // image HV segments as produced
  output logic                      hv_valid,
  output logic [SEG_W-1:0]          hv_seg_idx,
  output logic [P_D-1:0]            hv_bits,
  // result
  output logic                      pred_valid,
  output logic [CLS_W-1:0]          pred_class,
  output logic signed [SCORE_W-1:0] pred_score
);

  localparam int unsigned KH          = (IMG_H - M) / STRIDE + 1;
  localparam int unsigned KW          = (IMG_W - M) / STRIDE + 1;
  localparam int unsigned NUM_PATCHES = KH * KW;
  localparam int unsigned PACC_W      = 2 * BANK_W + $clog2(M * M);
  localparam int unsigned GACC_W      = PACC_W + $clog2(NUM_PATCHES);

  // ---------------------------------------------------------------- control
  issue_t issue_s0, issue_s1, issue_mem;
  logic [ADDR_W-1:0]  pix_addr_s0 [P_PATCH];
  logic [ADDR_W-1:0]  pix_addr_s1 [P_PATCH];
  logic [LEVEL_W-1:0] pix_level_s1 [P_PATCH];

  dataflow_controller #(
    .IMG_H(IMG_H), .IMG_W(IMG_W), .M(M), .STRIDE(STRIDE),
    .P_PATCH(P_PATCH), .P_D(P_D), .D(D), .ADDR_W(ADDR_W)
  ) u_ctl (
    .clk, .rst_n,
    .start   (start && !busy),
    .busy    (),
    .finished(),
    .issue   (issue_s0),
    .pix_addr(pix_addr_s0)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) busy <= 1'b0;
    else if (start && !busy) busy <= 1'b1;
    else if (pred_valid) busy <= 1'b0;
  end
  assign done = pred_valid;

  // ------------------------------------------------------- pixel quantizer
  logic               q_we;
  logic [ADDR_W-1:0]  q_addr;
  logic [LEVEL_W-1:0] q_level;

  pixel_quantizer #(
    .PIX_W(PIX_W), .LEVEL_W(LEVEL_W), .SCALE_W(16), .FRAC_W(8), .ZP_W(16), .ADDR_W(ADDR_W)
  ) u_quant (
    .clk, .rst_n,
    .inv_scale (q_inv_scale),
    .zero_point(q_zero_point),
    .in_valid  (img_we),
    .in_addr   (img_addr),
    .in_pixel  (img_pixel),
    .out_valid (q_we),
    .out_addr  (q_addr),
    .out_level (q_level)
  );

  // ------------------------------------------------------------ input buffer
  input_buffer #(
    .IMG_H(IMG_H), .IMG_W(IMG_W), .LEVEL_W(LEVEL_W), .P_PATCH(P_PATCH), .ADDR_W(ADDR_W)
  ) u_ibuf (
    .clk,
    .wr_en   (q_we),
    .wr_addr (q_addr),
    .wr_level(q_level),
    .rd_addr (pix_addr_s0),
    .rd_level(pix_level_s1)
  );

  delay_line #(.W($bits(issue_t)), .N(1)) u_dl_s1 (
    .clk, .rst_n, .din(issue_s0), .dout(issue_s1)
  );

  always_ff @(posedge clk) begin
    for (int p = 0; p < P_PATCH; p++) pix_addr_s1[p] <= pix_addr_s0[p];
  end

  // ------------------------------------------------------ bank read requests
  always_comb begin
    for (int p = 0; p < P_PATCH; p++) begin
      base_addr[p].row  = ROW_W'(pix_addr_s1[p]);
      base_addr[p].seg  = issue_s1.seg;
      level_addr[p].row = ROW_W'(pix_level_s1[p]);
      level_addr[p].seg = issue_s1.seg;
    end
  end

  delay_line #(.W($bits(issue_t)), .N(RD_LAT)) u_dl_mem (
    .clk, .rst_n, .din(issue_s1), .dout(issue_mem)
  );

  // -------------------------------------------------- patch processor array
  logic                     pp_valid [P_PATCH];
  issue_t                   pp_ctl   [P_PATCH];
  logic signed [PACC_W-1:0] pp_seg   [P_PATCH][P_D];

  for (genvar p = 0; p < P_PATCH; p++) begin : g_pp
    patch_processor #(
      .P_D(P_D), .D(D), .BANK_W(BANK_W), .M(M), .P_PATCH(P_PATCH),
      .NUM_PATCHES(NUM_PATCHES), .PROC_ID(p), .PACC_W(PACC_W)
    ) u_pp (
      .clk, .rst_n,
      .ctl       (issue_mem),
      .base_word (base_rdata[p]),
      .level_word(level_rdata[p]),
      .out_valid (pp_valid[p]),
      .out_ctl   (pp_ctl[p]),
      .out_seg   (pp_seg[p])
    );
  end

  // ------------------------------------------------------- global adder tree
  logic                     gat_valid;
  logic [SEG_W-1:0]         gat_seg_idx;
  logic [P_D-1:0]           gat_bits;

  global_adder_tree #(
    .P_PATCH(P_PATCH), .P_D(P_D), .PACC_W(PACC_W), .NUM_PATCHES(NUM_PATCHES), .GACC_W(GACC_W)
  ) u_gat (
    .clk, .rst_n,
    .in_valid   (pp_valid[0]),
    .in_ctl     (pp_ctl[0]),
    .in_seg     (pp_seg),
    .out_valid  (gat_valid),
    .out_seg_idx(gat_seg_idx),
    .out_sum    (),
    .out_bits   (gat_bits)
  );

  assign hv_valid   = gat_valid;
  assign hv_seg_idx = gat_seg_idx;
  assign hv_bits    = gat_bits;

  // --------------------------------------- similarity engine and class HVs
  logic [CLS_W-1:0]          se_rd_class;
  logic [SEGI_W-1:0]         se_rd_seg;
  logic [P_D-1:0]            se_rd_data;
  logic                      se_valid;
  logic signed [SCORE_W-1:0] se_scores [N_CLASSES];

  class_hv_buffer #(
    .N_CLASSES(N_CLASSES), .D(D), .P_D(P_D), .N_SEG(N_SEG), .CLS_W(CLS_W), .SEGI_W(SEGI_W)
  ) u_cbuf (
    .clk,
    .wr_en   (cls_we),
    .wr_class(cls_class),
    .wr_seg  (cls_seg),
    .wr_data (cls_data),
    .rd_class(se_rd_class),
    .rd_seg  (se_rd_seg),
    .rd_data (se_rd_data)
  );

  similarity_engine #(
    .N_CLASSES(N_CLASSES), .P_D(P_D), .D(D), .N_SEG(N_SEG),
    .CLS_W(CLS_W), .SEGI_W(SEGI_W), .SCORE_W(SCORE_W)
  ) u_sim (
    .clk, .rst_n,
    .seg_valid   (gat_valid),
    .seg_idx     (gat_seg_idx),
    .seg_bits    (gat_bits),
    .cls_rd_class(se_rd_class),
    .cls_rd_seg  (se_rd_seg),
    .cls_rd_data (se_rd_data),
    .busy        (),
    .scores_valid(se_valid),
    .scores      (se_scores)
  );

  // ------------------------------------------------------------------ argmax
  argmax_unit #(
    .N_CLASSES(N_CLASSES), .SCORE_W(SCORE_W), .CLS_W(CLS_W)
  ) u_argmax (
    .clk, .rst_n,
    .in_valid (se_valid),
    .scores   (se_scores),
    .out_valid(pred_valid),
    .out_class(pred_class),
    .out_score(pred_score)
  );

  // The schedule must leave the similarity engine time to score a segment
  // against every class before the next segment arrives.
  if ((NUM_PATCHES + P_PATCH - 1) / P_PATCH * M * M < N_CLASSES + 2) begin : g_chk_rate
    $error("hdc_accel_top: N_GROUPS*M*M must be at least N_CLASSES+2");
  end

endmodule
