// hbm_model: behavioural model of the device memory that holds the base and
// level hypervector banks.
//
// For every patch processor p it answers one base-bank and one level-bank
// read per cycle: the P_D elements of segment `seg` of row `row`, i.e.
// elements seg*P_D .. seg*P_D+P_D-1, with contents defined by
// hdc_ref_pkg::bank_elem(). Data for the address presented in cycle c is
// on the outputs during cycle c+RD_LAT (fixed latency, RD_LAT >= 1). It stands
// in for the HBM stack and its controller, which are not modelled further.
module hbm_model
  import hdc_pkg::*;
  import hdc_ref_pkg::*;
#(
  parameter int unsigned P_PATCH = 16,
  parameter int unsigned P_D     = 256,
  parameter int unsigned BANK_W  = 8,
  parameter int unsigned RD_LAT  = 2
) (
  input  logic                     clk,
  input  bank_addr_t               base_addr   [P_PATCH],
  input  bank_addr_t               level_addr  [P_PATCH],
  output logic signed [BANK_W-1:0] base_rdata  [P_PATCH][P_D],
  output logic signed [BANK_W-1:0] level_rdata [P_PATCH][P_D]
);

  logic signed [BANK_W-1:0] bpipe [RD_LAT][P_PATCH][P_D];
  logic signed [BANK_W-1:0] lpipe [RD_LAT][P_PATCH][P_D];

  always_ff @(posedge clk) begin
    for (int p = 0; p < P_PATCH; p++)
      for (int k = 0; k < P_D; k++) begin
        bpipe[0][p][k] <= BANK_W'(bank_elem(0, int'(base_addr[p].row),  int'(base_addr[p].seg)  * P_D + k));
        lpipe[0][p][k] <= BANK_W'(bank_elem(1, int'(level_addr[p].row), int'(level_addr[p].seg) * P_D + k));
      end
    for (int s = 1; s < RD_LAT; s++) begin
      bpipe[s] <= bpipe[s-1];
      lpipe[s] <= lpipe[s-1];
    end
  end

  assign base_rdata  = bpipe[RD_LAT-1];
  assign level_rdata = lpipe[RD_LAT-1];

endmodule
