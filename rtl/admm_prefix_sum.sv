// admm_prefix_sum: pipelined inclusive prefix sum (Hillis-Steele / Kogge-
// Stone form). out[k] = in[0] + ... + in[k] for signed values. The log2(N)
// addition layers are each one register stage: a new vector every clock,
// result log2(N) cycles later. Inputs of W_IN bits are sign-extended to
// W_OUT bits, which the caller sizes so that no sum overflows.
// The paper names prefix sums as a projection primitive; the Hillis-Steele
// form is this design's choice.
module admm_prefix_sum #(
  parameter int  N     = 8,
  parameter int  W_IN  = 16,
  parameter int  W_OUT = 20,
  localparam int LG    = $clog2(N)
) (
  input  logic                    clk,
  input  logic [N-1:0][W_IN-1:0]  d,
  output logic [N-1:0][W_OUT-1:0] q
);
  logic [N-1:0][W_OUT-1:0] st [LG+1];

  always_comb
    for (int i = 0; i < N; i++) st[0][i] = W_OUT'($signed(d[i]));

  for (genvar l = 0; l < LG; l++) begin : g_layer
    always_ff @(posedge clk)
      for (int i = 0; i < N; i++)
        st[l+1][i] <= (i >= (1 << l)) ? st[l][i] + st[l][(i >= (1 << l)) ? i - (1 << l) : 0] : st[l][i];
  end

  assign q = st[LG];
endmodule
