// dataflow_controller: sequences one image through the patch processor array.
//
// One inference is three nested loops, one issue cycle per innermost step:
//   for pass in 0 .. N_SEG+1          (hypervector segments, see below)
//     for group in 0 .. N_GROUPS-1    (patches t = group*P_PATCH + p)
//       for pix in 0 .. M*M-1         (pixel of the patch, row-major)
// Passes 0 and 1 are warm-up passes over segments N_SEG-2 and N_SEG-1 that
// fill the rotation history of the patch processors; passes 2 .. N_SEG+1
// produce output segments 0 .. N_SEG-1 in order. In total an image takes
// (N_SEG+2) * N_GROUPS * M*M issue cycles.
//
// Each cycle the controller presents an issue_t record (valid, first/last
// pixel, pass kind, group, first/last group, segment) and, for every patch
// processor p, the position i*IMG_W+j of pixel `pix` of patch
// t = group*P_PATCH + p, where patch t sits at grid cell (t / KW, t % KW),
// its top-left pixel at (row*STRIDE, col*STRIDE). Processor slots beyond the
// last patch get position 0; the processor itself zeroes their output.
//
// Interface and timing: a start pulse while idle begins issuing on the next
// cycle; busy is high while issuing; `finished` pulses with the last issue.
//
// The loop order (segments outer, patches inner) follows the paper's
// streaming dataflow, in which every image-HV segment is completed and
// consumed before the next. The assignment of patches to processors in
// groups and the warm-up passes are this design's choice.
module dataflow_controller
  import hdc_pkg::*;
#(
  parameter int unsigned IMG_H   = 32,
  parameter int unsigned IMG_W   = 32,
  parameter int unsigned M       = 3,
  parameter int unsigned STRIDE  = 3,
  parameter int unsigned P_PATCH = 16,
  parameter int unsigned P_D     = 256,
  parameter int unsigned D       = 10000,
  parameter int unsigned ADDR_W  = $clog2(IMG_H * IMG_W)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  output logic              busy,
  output logic              finished,
  output issue_t            issue,
  output logic [ADDR_W-1:0] pix_addr [P_PATCH]
);

  localparam int unsigned KH          = (IMG_H - M) / STRIDE + 1;
  localparam int unsigned KW          = (IMG_W - M) / STRIDE + 1;
  localparam int unsigned NUM_PATCHES = KH * KW;
  localparam int unsigned N_GROUPS    = (NUM_PATCHES + P_PATCH - 1) / P_PATCH;
  localparam int unsigned N_SEG       = (D + P_D - 1) / P_D;
  localparam int unsigned N_PASS      = N_SEG + 2;

  int unsigned pass_q, group_q, pix_q;
  logic        run_q;

  wire last_pix   = (pix_q == M * M - 1);
  wire last_group = (group_q == N_GROUPS - 1);
  wire last_pass  = (pass_q == N_PASS - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run_q   <= 1'b0;
      pass_q  <= 0;
      group_q <= 0;
      pix_q   <= 0;
    end else if (!run_q) begin
      if (start) begin
        run_q   <= 1'b1;
        pass_q  <= 0;
        group_q <= 0;
        pix_q   <= 0;
      end
    end else begin
      if (!last_pix) begin
        pix_q <= pix_q + 1;
      end else begin
        pix_q <= 0;
        if (!last_group) begin
          group_q <= group_q + 1;
        end else begin
          group_q <= 0;
          if (!last_pass) pass_q <= pass_q + 1;
          else            run_q  <= 1'b0;
        end
      end
    end
  end

  assign busy     = run_q;
  assign finished = run_q && last_pix && last_group && last_pass;

  always_comb begin
    issue           = '0;
    issue.valid     = run_q;
    issue.first     = (pix_q == 0);
    issue.last      = last_pix;
    issue.group     = GROUP_W'(group_q);
    issue.grp_first = (group_q == 0);
    issue.grp_last  = last_group;
    if (pass_q == 0) begin
      issue.pass = PASS_WARM0;
      issue.seg  = SEG_W'(N_SEG - 2);
    end else if (pass_q == 1) begin
      issue.pass = PASS_WARM1;
      issue.seg  = SEG_W'(N_SEG - 1);
    end else begin
      issue.pass = PASS_EMIT;
      issue.seg  = SEG_W'(pass_q - 2);
    end
  end

  always_comb begin
    for (int p = 0; p < P_PATCH; p++) begin
      int unsigned t, prow, pcol, qi, qj;
      t    = group_q * P_PATCH + p;
      prow = t / KW;
      pcol = t % KW;
      qi   = pix_q / M;
      qj   = pix_q % M;
      if (t < NUM_PATCHES) pix_addr[p] = ADDR_W'((prow * STRIDE + qi) * IMG_W + pcol * STRIDE + qj);
      else                 pix_addr[p] = '0;
    end
  end

endmodule
