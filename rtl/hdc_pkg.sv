// hdc_pkg: types shared by the blocks of the patch-based HDC inference
// accelerator.
//
// The accelerator walks an inference as a sequence of "issue" cycles. Every
// cycle one pixel of each active patch is fetched; the issue_t record travels
// with that pixel down the pipeline (input buffer -> bank memory -> patch
// processors -> global adder tree) so that every stage knows which segment,
// patch group and pixel the data belongs to. Index fields use fixed, generous
// widths so that one record type serves every parameter set.
package hdc_pkg;

  localparam int unsigned SEG_W   = 16;  // segment index width
  localparam int unsigned GROUP_W = 8;   // patch-group index width
  localparam int unsigned ROW_W   = 16;  // bank row (pixel position or level)

  // Kind of pass over one hypervector segment.
  //  PASS_WARM0 / PASS_WARM1: the two warm-up passes over the last two
  //  segments, which only fill the rotation history of the patch processors.
  //  PASS_EMIT: a normal pass that produces an output segment.
  typedef enum logic [1:0] {
    PASS_WARM0 = 2'd0,
    PASS_WARM1 = 2'd1,
    PASS_EMIT  = 2'd2
  } pass_e;

  typedef struct packed {
    logic               valid;      // this cycle carries a pixel
    logic               first;      // first pixel of the patch
    logic               last;       // last pixel of the patch
    pass_e              pass;       // warm-up or emitting pass
    logic [GROUP_W-1:0] group;      // patch group (patch t = group*P_PATCH + processor)
    logic               grp_first;  // group == 0
    logic               grp_last;   // last group of the segment
    logic [SEG_W-1:0]   seg;        // hypervector segment being processed
  } issue_t;

  // Read request to the bank memory: row of the bank, and the P_D-wide segment.
  typedef struct packed {
    logic [ROW_W-1:0] row;
    logic [SEG_W-1:0] seg;
  } bank_addr_t;

endpackage
