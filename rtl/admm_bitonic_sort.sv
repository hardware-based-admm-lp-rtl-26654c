// admm_bitonic_sort: pipelined bitonic sorting network that orders N signed
// W-bit values in descending order (out[0] largest). N must be a power of
// two. Each of the log2(N)*(log2(N)+1)/2 compare-exchange layers is one
// register stage, so a new vector enters every clock and leaves
// log2(N)*(log2(N)+1)/2 cycles later. Ties keep no particular order, which
// does not matter for the values produced.
// The paper calls for sorting networks in the projection; the bitonic form
// and the one-register-per-layer pipelining are this design's choice.
module admm_bitonic_sort #(
  parameter int  N  = 8,
  parameter int  W  = 16,
  localparam int LG = $clog2(N),
  localparam int NL = LG * (LG + 1) / 2
) (
  input  logic                clk,
  input  logic [N-1:0][W-1:0] d,
  output logic [N-1:0][W-1:0] q
);
  // block size k and partner distance j of compare-exchange layer l
  function automatic int layer_k(input int l);
    int n = 0;
    for (int kk = 2; kk <= N; kk *= 2)
      for (int jj = kk / 2; jj > 0; jj /= 2) begin
        if (n == l) return kk;
        n++;
      end
    return 2;
  endfunction

  function automatic int layer_j(input int l);
    int n = 0;
    for (int kk = 2; kk <= N; kk *= 2)
      for (int jj = kk / 2; jj > 0; jj /= 2) begin
        if (n == l) return jj;
        n++;
      end
    return 1;
  endfunction

  logic [N-1:0][W-1:0] st [NL+1];
  assign st[0] = d;

  for (genvar l = 0; l < NL; l++) begin : g_layer
    localparam int K = layer_k(l);
    localparam int J = layer_j(l);
    always_ff @(posedge clk) begin
      for (int i = 0; i < N; i++) begin
        int  p;
        logic desc, swap;
        p = i ^ J;
        // blocks with (i & K) == 0 sort descending, the others ascending;
        // a full pass over all layers leaves the vector descending
        desc = ((i & K) == 0);
        if (p > i) begin
          swap = desc ? ($signed(st[l][i]) < $signed(st[l][p]))
                      : ($signed(st[l][i]) > $signed(st[l][p]));
          st[l+1][i] <= swap ? st[l][p] : st[l][i];
          st[l+1][p] <= swap ? st[l][i] : st[l][p];
        end
      end
    end
  end

  assign q = st[NL];
endmodule
