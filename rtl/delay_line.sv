// delay_line: N-cycle register pipeline for a W-bit value (N = 0 is a wire).
// Used to keep the control record of a pixel aligned with its data while the
// data waits for the input buffer and the bank memory.
module delay_line #(
  parameter int unsigned W = 8,
  parameter int unsigned N = 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] din,
  output logic [W-1:0] dout
);

  if (N == 0) begin : g_wire
    assign dout = din;
  end else begin : g_pipe
    logic [W-1:0] pipe [N];
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        for (int i = 0; i < N; i++) pipe[i] <= '0;
      end else begin
        pipe[0] <= din;
        for (int i = 1; i < N; i++) pipe[i] <= pipe[i-1];
      end
    end
    assign dout = pipe[N-1];
  end

endmodule
