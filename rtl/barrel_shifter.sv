// barrel_shifter: logarithmic element shifter used by the patch processor to
// apply the patch-dependent cyclic rotation.
//
// The input is a vector of N_IN elements of W bits. The output is the window
// of N_OUT elements starting at element `amount`:
//     dout[k] = din[k + amount]     (0 when k + amount >= N_IN)
// It is built as SH_W stages of 2:1 multiplexers, stage b moving the vector
// by 2^b elements when bit b of `amount` is set. Purely combinational.
module barrel_shifter #(
  parameter int unsigned W     = 20,
  parameter int unsigned N_IN  = 512,
  parameter int unsigned N_OUT = 256,
  parameter int unsigned SH_W  = $clog2(N_IN)
) (
  input  logic signed [W-1:0] din  [N_IN],
  input  logic [SH_W-1:0]     amount,
  output logic signed [W-1:0] dout [N_OUT]
);

  logic signed [W-1:0] stage [SH_W+1][N_IN];

  always_comb begin
    for (int i = 0; i < N_IN; i++) stage[0][i] = din[i];
    for (int b = 0; b < SH_W; b++) begin
      for (int i = 0; i < N_IN; i++) begin
        if (amount[b]) stage[b+1][i] = (i + (1 << b) < N_IN) ? stage[b][(i + (1 << b)) % N_IN] : '0;
        else           stage[b+1][i] = stage[b][i];
      end
    end
    for (int k = 0; k < N_OUT; k++) dout[k] = stage[SH_W][k];
  end

endmodule
