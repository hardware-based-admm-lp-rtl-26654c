// admm_delay: a plain shift-register delay line of N clock cycles for a
// W-bit bundle. N = 0 gives a wire. Used to pad node pipelines to their
// target depth and to carry side information (addresses, flags, operands)
// alongside a computation. The stages are not reset; callers delay their
// valid bit through a reset delay line of their own or ignore data without
// a valid. A helper of this design, not a block of the paper.
module admm_delay #(
  parameter int W = 1,
  parameter int N = 1
) (
  input  logic         clk,
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);
  if (N == 0) begin : g_wire
    assign q = d;
  end else begin : g_regs
    logic [W-1:0] sr [N];
    always_ff @(posedge clk) begin
      sr[0] <= d;
      for (int i = 1; i < N; i++) sr[i] <= sr[i-1];
    end
    assign q = sr[N-1];
  end
endmodule
