// admm_pp_project: pipelined Euclidean projection of a D-dimensional point v
// onto the parity polytope PP_D (the convex hull of the even-weight vertices
// of the unit hypercube).
//
// Method, in the order the paper gives it:
//  1. Cut search: take the hard decisions f_i = (v_i > 1/2). If f has even
//     weight, flip the entry whose v_i lies closest to 1/2. f now names the
//     one facet of the polytope the projection can lie on.
//  2. Project onto the unit cube, u = clip(v, 0, 1). If u satisfies the facet
//     inequality  sum_{f_i=1} u_i - sum_{f_i=0} u_i <= |f| - 1, u is the
//     answer (the point is inside the polytope after clipping).
//  3. Otherwise apply the similarity transform w_i = f_i ? 1 - v_i : v_i,
//     which maps the facet onto the probability simplex, and project w onto
//     the simplex by the sort-based method: sort w descending (mu), form the
//     prefix sums S_k, take rho = the largest k with k*mu_k > S_k - 1 and
//     tau = (S_rho - 1) / rho, and set w'_i = max(w_i - tau, 0).
//  4. Invert the transform: z_i = f_i ? 1 - w'_i : w'_i.
// The sort is a bitonic network and the prefix sum a log-depth adder tree,
// both fully pipelined. The division by rho is a multiplication by a
// rounded reciprocal 2^16/rho chosen by a small constant table, truncated
// toward minus infinity.
//
// Numbers: v is signed with 9 fraction bits (W_IN bits, default 14, i.e.
// range [-16, 16)); z is Q1.9 in [0, 1] (11 bits). Internally elements use
// 16 bits and sums 22 bits, enough for D <= 16 without overflow.
//
// Timing: one vector per clock, result LAT = 7 + log2(N)(log2(N)+1)/2 +
// log2(N) cycles after the input, N = D rounded up to a power of two
// (16 for D = 5, 21 for D = 14..16). TAG_W bits of caller data travel with
// the vector. flipped_o reports that the cut search flipped a bit,
// on_facet_o that the simplex projection (not the cube clip) gave z.
module admm_pp_project
  import admm_pkg::*;
#(
  parameter int  D     = 5,
  parameter int  W_IN  = CN_VW,
  parameter int  TAG_W = 1,
  localparam int N     = 1 << $clog2(D),
  localparam int LG    = $clog2(D),
  localparam int NL    = LG * (LG + 1) / 2,
  localparam int LAT   = 7 + NL + LG
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  valid_i,
  input  logic [D-1:0][W_IN-1:0] v_i,
  input  logic [TAG_W-1:0]      tag_i,
  output logic                  valid_o,
  output logic [D-1:0][V_W-1:0] z_o,
  output logic [TAG_W-1:0]      tag_o,
  output logic                  flipped_o,
  output logic                  on_facet_o
);
  localparam int PW  = 16;     // element width
  localparam int SW  = 22;     // sum width
  localparam int RB  = 16;     // reciprocal fraction bits
  localparam int MW  = SW + RB + 2;
  localparam int CW  = $clog2(D + 1);
  localparam logic signed [PW-1:0] ONE  = PW'(V_ONE);
  localparam logic signed [PW-1:0] HALF = PW'(V_HALF);
  localparam logic signed [PW-1:0] PAD  = {1'b1, {(PW-1){1'b0}}};  // sorts last

  if (D < 2 || D > 16) begin : g_bad_d
    $error("admm_pp_project: D must be in 2..16");
  end

  // ---------------- stage 1: hard decisions, distance to 1/2, cube clip
  logic [D-1:0]                 f1;
  logic [D-1:0][PW-1:0]         v1, dist1, u1;
  logic [TAG_W-1:0]             tag1;

  always_ff @(posedge clk) begin
    for (int i = 0; i < D; i++) begin
      logic signed [PW-1:0] vv, dd;
      vv = PW'($signed(v_i[i]));
      dd = vv - HALF;
      v1[i]    <= vv;
      f1[i]    <= vv > HALF;
      dist1[i] <= (dd < 0) ? -dd : dd;
      u1[i]    <= (vv < 0) ? '0 : (vv > ONE) ? ONE : vv;
    end
    tag1 <= tag_i;
  end

  // ---------------- stage 2: cut search (parity fix), transform, facet sum
  logic [D-1:0]         f2;
  logic [D-1:0][PW-1:0] w2, u2;
  logic signed [SW-1:0] facet2;
  logic [CW-1:0]        cnt2;
  logic                 flip2;
  logic [TAG_W-1:0]     tag2;

  always_ff @(posedge clk) begin
    logic [D-1:0]         ff;
    int                   imin;
    logic signed [SW-1:0] acc;
    logic [CW-1:0]        cnt;
    imin = 0;
    for (int i = 1; i < D; i++)
      if ($signed(dist1[i]) < $signed(dist1[imin])) imin = i;
    ff = f1;
    if (!(^f1)) ff[imin] = ~ff[imin];
    acc = '0;
    cnt = '0;
    for (int i = 0; i < D; i++) begin
      w2[i] <= ff[i] ? PW'(ONE - $signed(v1[i])) : v1[i];
      if (ff[i]) begin
        acc += SW'($signed(u1[i]));
        cnt += 1'b1;
      end else begin
        acc -= SW'($signed(u1[i]));
      end
    end
    f2     <= ff;
    u2     <= u1;
    facet2 <= acc;
    cnt2   <= cnt;
    flip2  <= !(^f1);
    tag2   <= tag1;
  end

  // ---------------- stage 3: is the clipped point inside the polytope?
  logic [D-1:0]         f3;
  logic [D-1:0][PW-1:0] w3, u3;
  logic                 in3, flip3;
  logic [TAG_W-1:0]     tag3;

  always_ff @(posedge clk) begin
    logic signed [SW-1:0] bound;
    bound = SW'((int'(cnt2) - 1) * V_ONE);
    in3   <= facet2 <= bound;
    f3    <= f2;
    w3    <= w2;
    u3    <= u2;
    flip3 <= flip2;
    tag3  <= tag2;
  end

  // ---------------- sort descending, then prefix sums
  logic [N-1:0][PW-1:0] sort_in, mu;
  logic [N-1:0][SW-1:0] psum;
  logic [N-1:0][PW-1:0] mu_d;

  always_comb
    for (int i = 0; i < N; i++) sort_in[i] = (i < D) ? w3[i] : PAD;

  admm_bitonic_sort #(.N(N), .W(PW)) u_sort (.clk, .d(sort_in), .q(mu));
  admm_prefix_sum #(.N(N), .W_IN(PW), .W_OUT(SW)) u_psum (.clk, .d(mu), .q(psum));
  admm_delay #(.W(N*PW), .N(LG)) u_mu_d (.clk, .d(mu), .q(mu_d));

  // ---------------- stage C: support test k*mu_k > S_k - 1 (k = 1..D)
  logic [D-1:0]                 cond_c;
  logic [D-1:0][SW-1:0]         psum_c;
  always_ff @(posedge clk) begin
    for (int i = 0; i < D; i++) begin
      cond_c[i] <= SW'(i + 1) * SW'($signed(mu_d[i])) > $signed(psum[i]) - SW'(V_ONE);
      psum_c[i] <= psum[i];
    end
  end

  // ---------------- stage R: rho = last k passing the test, S_rho
  logic [CW-1:0]        rho_r;
  logic signed [SW-1:0] srho_r;
  always_ff @(posedge clk) begin
    rho_r  <= CW'(1);
    srho_r <= psum_c[0];
    for (int i = 1; i < D; i++)
      if (cond_c[i]) begin
        rho_r  <= CW'(i + 1);
        srho_r <= psum_c[i];
      end
  end

  // ---------------- stage T: tau = (S_rho - 1) / rho
  logic signed [SW-1:0] tau_t;
  always_ff @(posedge clk) begin
    logic signed [MW-1:0] rcp, prod;
    rcp = '0;
    for (int k = 1; k <= D; k++)
      if (rho_r == CW'(k)) rcp = MW'(recip(k, RB));
    prod  = (MW'(srho_r) - MW'(V_ONE)) * rcp;
    tau_t <= SW'(prod >>> RB);
  end

  // ---------------- side data delayed to meet tau
  localparam int SIDE = NL + LG + 3;
  localparam int SDW  = D + 2 * D * PW + 2 + TAG_W;
  logic [D-1:0]         f_s;
  logic [D-1:0][PW-1:0] w_s, u_s;
  logic                 in_s, flip_s;
  logic [TAG_W-1:0]     tag_s;

  admm_delay #(.W(SDW), .N(SIDE)) u_side (
    .clk,
    .d({f3, w3, u3, in3, flip3, tag3}),
    .q({f_s, w_s, u_s, in_s, flip_s, tag_s})
  );

  // ---------------- stage Z: simplex clip and inverse transform
  always_ff @(posedge clk) begin
    for (int i = 0; i < D; i++) begin
      logic signed [SW-1:0] zp, zz;
      zp = SW'($signed(w_s[i])) - tau_t;
      if (zp < 0)               zp = '0;
      else if (zp > SW'(V_ONE)) zp = SW'(V_ONE);
      zz = f_s[i] ? SW'(V_ONE) - zp : zp;   // in [0, 1]: upper bits are zero
      z_o[i] <= in_s ? V_W'(u_s[i]) : zz[V_W-1:0];
    end
    tag_o      <= tag_s;
    flipped_o  <= flip_s;
    on_facet_o <= !in_s;
  end

  admm_valid_delay #(.N(LAT)) u_vld (.clk, .rst_n, .d(valid_i), .q(valid_o));
endmodule
