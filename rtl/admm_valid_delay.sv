// admm_valid_delay: an N-cycle delay line for a single valid bit, with a
// synchronous active-low reset that clears every stage, so that no stale
// valid leaves a pipeline after reset. N = 0 gives a wire.
// A helper of this design, not a block of the paper.
module admm_valid_delay #(
  parameter int N = 1
) (
  input  logic clk,
  input  logic rst_n,
  input  logic d,
  output logic q
);
  if (N == 0) begin : g_wire
    assign q = d;
  end else begin : g_regs
    logic [N-1:0] sr;
    always_ff @(posedge clk) begin
      if (!rst_n) begin
        sr <= '0;
      end else begin
        sr[0] <= d;
        for (int i = 1; i < N; i++) sr[i] <= sr[i-1];
      end
    end
    assign q = sr[N-1];
  end
endmodule
