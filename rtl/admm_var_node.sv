// admm_var_node: pipelined variable-node unit of the ADMM-LP decoder.
//
// Computes, for one variable per cycle,
//     x = clip_[0,1]( (sum_k c_k - gamma) / DEG )
// where c_k are the DEG incoming CN-to-VN messages (Q3.7) and gamma is the
// channel LLR (Q0.7). The division by the degree is a multiplication by the
// rounded reciprocal 2^12/DEG (a shift for degrees 1 and 2), truncated toward
// minus infinity as the paper's fixed-point datapath does. The result is
// delivered as a Q1.9 value in [0, 1] and serves both as the VN-to-CN
// message and as the estimate.
//
// Timing: 4 working stages (input register, sum, scale, clip), padded with
// a delay line to LATENCY cycles, which defaults to the depth the paper
// reports for a node of this degree. One new variable per clock; valid_o
// follows valid_i by exactly LATENCY cycles.
module admm_var_node
  import admm_pkg::*;
#(
  parameter int DEG     = 3,
  parameter int LATENCY = vn_latency(DEG)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      valid_i,
  input  logic [LLR_W-1:0]          llr_i,
  input  logic [DEG-1:0][C_W-1:0]   c_i,
  output logic                      valid_o,
  output logic [V_W-1:0]            x_o
);
  localparam int CORE = 4;
  localparam int RB   = 12;                              // reciprocal fraction bits
  localparam int SW   = C_W + $clog2(DEG + 1) + 1;       // sum width, Q.7
  localparam int PW   = SW + RB + 2;                     // product width
  localparam longint RCP = recip(DEG, RB);

  if (LATENCY < CORE) begin : g_bad_latency
    $error("admm_var_node: LATENCY must be at least %0d", CORE);
  end

  logic [DEG-1:0][C_W-1:0] c_q;
  logic [LLR_W-1:0]        llr_q;
  logic signed [SW-1:0]    sum_q;
  logic signed [PW-1:0]    prod_q;
  logic [V_W-1:0]          x_q;

  // stage 1: input register
  always_ff @(posedge clk) begin
    c_q   <= c_i;
    llr_q <= llr_i;
  end

  // stage 2: sum of messages minus channel LLR (all with 7 fraction bits)
  always_ff @(posedge clk) begin
    logic signed [SW-1:0] acc;
    acc = -SW'($signed(llr_q));
    for (int k = 0; k < DEG; k++) acc += SW'($signed(c_q[k]));
    sum_q <= acc;
  end

  // stage 3: divide by the degree; result carries RB+7 fraction bits
  always_ff @(posedge clk) begin
    prod_q <= PW'(sum_q) * PW'(RCP);
  end

  // stage 4: drop to 9 fraction bits (floor) and clip to [0, 1]
  always_ff @(posedge clk) begin
    logic signed [PW-1:0] q9;
    q9 = prod_q >>> (RB + C_F - V_F);
    if (q9 < 0)                 x_q <= '0;
    else if (q9 > PW'(V_ONE))   x_q <= V_W'(V_ONE);
    else                        x_q <= V_W'(q9);
  end

  admm_delay #(.W(V_W), .N(LATENCY - CORE)) u_pad (.clk, .d(x_q), .q(x_o));
  admm_valid_delay #(.N(LATENCY)) u_vld (.clk, .rst_n, .d(valid_i), .q(valid_o));
endmodule
