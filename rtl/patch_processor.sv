// patch_processor: encodes one M x M image patch into one P_D-wide segment of
// its permuted patch hypervector.
//
// What it computes. For patch t and output segment s it produces
//     out[k] = sum_{pixels (i,j) of patch t}  B_ij[src] * L_lvl(i,j)[src],
//     src    = (s*P_D + k - t) mod D,
// i.e. segment s of pi^t(sum of bound pixel HVs), the cyclic rotation by the
// patch ID t. B (base bank, one HV per pixel position) and L (level bank, one
// HV per intensity level) arrive one P_D-wide aligned segment per pixel per
// cycle.
//
// How. P_D signed multiply-accumulate lanes bind B and L element-wise and sum
// the M*M pixels of the patch (acc). The rotation is applied afterwards by a
// barrel shifter: output segment s needs the last t elements of input segment
// s-1 followed by the first P_D-t elements of input segment s, so the
// processor keeps the previous segment's accumulator for each patch group it
// serves (hist, N_GROUPS x P_D) and shifts the concatenation {acc, hist} by
// P_D - t. Because D need not be a multiple of P_D, the source of segment 0
// is the last P_D elements of the whole vector; two warm-up passes over
// segments N_SEG-2 and N_SEG-1 (PASS_WARM0/1) build exactly those elements
// into hist before the first emitting pass, which keeps the rotation exact
// modulo D. Lanes of the last segment beyond D carry garbage and must be
// ignored downstream.
//
// Interface and timing. ctl/base_word/level_word are sampled together every
// cycle; ctl.first starts a new patch sum, ctl.last ends it. One cycle after
// an emitting ctl.last, out_valid pulses with out_seg and a copy of the
// control record (out_ctl). A processor whose patch ID is beyond NUM_PATCHES
// (idle slot of the last group) emits zeros. Requires NUM_PATCHES <= P_D
// (a rotation never reaches past the previous segment) and D > P_D.
//
// Following the paper: P_D MAC lanes per processor, element-wise binding,
// accumulation over the M*M pixels in a local P_D-wide buffer, then the
// patch-dependent permutation by a barrel shifter. This design's choices:
// BANK_W-bit signed fixed-point bank elements (the paper uses real values),
// the per-group history and the two warm-up passes.
module patch_processor
  import hdc_pkg::*;
#(
  parameter int unsigned P_D         = 256,
  parameter int unsigned D           = 10000,
  parameter int unsigned BANK_W      = 8,
  parameter int unsigned M           = 3,
  parameter int unsigned P_PATCH     = 16,
  parameter int unsigned NUM_PATCHES = 100,
  parameter int unsigned PROC_ID     = 0,
  parameter int unsigned PACC_W      = 2 * BANK_W + $clog2(M * M)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  issue_t                   ctl,
  input  logic signed [BANK_W-1:0] base_word  [P_D],
  input  logic signed [BANK_W-1:0] level_word [P_D],
  output logic                     out_valid,
  output issue_t                   out_ctl,
  output logic signed [PACC_W-1:0] out_seg    [P_D]
);

  localparam int unsigned N_SEG    = (D + P_D - 1) / P_D;
  localparam int unsigned V        = D - (N_SEG - 1) * P_D;  // valid lanes of the last segment
  localparam int unsigned N_GROUPS = (NUM_PATCHES + P_PATCH - 1) / P_PATCH;
  localparam int unsigned SH_W     = $clog2(2 * P_D);

  if (NUM_PATCHES > P_D) begin : g_chk_patches
    $error("patch_processor: NUM_PATCHES must not exceed P_D");
  end
  if (N_SEG < 2) begin : g_chk_seg
    $error("patch_processor: D must exceed P_D");
  end

  logic signed [PACC_W-1:0] acc      [P_D];
  logic signed [PACC_W-1:0] acc_next [P_D];
  logic signed [PACC_W-1:0] hist     [N_GROUPS][P_D];
  logic signed [PACC_W-1:0] hist_g   [P_D];
  logic signed [PACC_W-1:0] tail     [P_D];
  logic signed [PACC_W-1:0] cat      [2*P_D];
  logic signed [PACC_W-1:0] rotated  [P_D];

  localparam int unsigned GI_W = (N_GROUPS > 1) ? $clog2(N_GROUPS) : 1;
  logic [GI_W-1:0] gidx;
  logic [15:0]     patch_id;
  logic            patch_valid;
  logic [SH_W-1:0] shift_amt;

  assign gidx        = GI_W'(ctl.group);
  assign patch_id    = 16'(int'(ctl.group) * P_PATCH + PROC_ID);
  assign patch_valid = (int'(patch_id) < NUM_PATCHES);
  assign shift_amt   = SH_W'(P_D - int'(patch_id));

  // Binding (element-wise multiply) and accumulation over the patch pixels.
  always_comb begin
    for (int k = 0; k < P_D; k++) begin
      logic signed [2*BANK_W-1:0] prod;
      prod        = base_word[k] * level_word[k];
      acc_next[k] = (ctl.first ? PACC_W'(0) : acc[k]) + PACC_W'(prod);
    end
  end

  always_comb begin
    for (int k = 0; k < P_D; k++) hist_g[k] = hist[gidx][k];
  end

  // Last P_D elements of the vector: the V valid lanes of segment N_SEG-1
  // (acc_next during PASS_WARM1) preceded by the top P_D-V lanes of segment
  // N_SEG-2 (held in hist after PASS_WARM0). Constant wiring.
  for (genvar k = 0; k < P_D; k++) begin : g_tail
    if (k >= P_D - V) begin : g_hi
      assign tail[k] = acc_next[k - (P_D - V)];
    end else begin : g_lo
      assign tail[k] = hist_g[k + V];
    end
  end

  // Rotation window: {current segment, previous segment} shifted by P_D - t.
  always_comb begin
    for (int k = 0; k < P_D; k++) begin
      cat[k]       = hist_g[k];
      cat[P_D + k] = acc_next[k];
    end
  end

  barrel_shifter #(
    .W    (PACC_W),
    .N_IN (2 * P_D),
    .N_OUT(P_D),
    .SH_W (SH_W)
  ) u_rot (
    .din   (cat),
    .amount(shift_amt),
    .dout  (rotated)
  );

  always_ff @(posedge clk) begin
    if (ctl.valid) begin
      for (int k = 0; k < P_D; k++) acc[k] <= acc_next[k];
      if (ctl.last) begin
        unique case (ctl.pass)
          PASS_WARM0: for (int k = 0; k < P_D; k++) hist[gidx][k] <= acc_next[k];
          PASS_WARM1: for (int k = 0; k < P_D; k++) hist[gidx][k] <= tail[k];
          default:    for (int k = 0; k < P_D; k++) hist[gidx][k] <= acc_next[k];
        endcase
      end
    end
  end

  always_ff @(posedge clk) begin
    if (ctl.valid && ctl.last && ctl.pass == PASS_EMIT) begin
      for (int k = 0; k < P_D; k++) out_seg[k] <= patch_valid ? rotated[k] : '0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_ctl   <= '0;
    end else begin
      out_valid <= ctl.valid && ctl.last && (ctl.pass == PASS_EMIT);
      out_ctl   <= ctl;
    end
  end

endmodule
