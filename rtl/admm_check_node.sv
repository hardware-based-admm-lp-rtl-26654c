// admm_check_node: pipelined check-node unit of the ADMM-LP decoder.
//
// For one check per cycle, with x_k the DEG incoming VN-to-CN messages (Q1.9)
// and lambda_k the check's stored state (Q3.7):
//     v       = x + lambda
//     z       = projection of v onto the parity polytope PP_DEG
//     lambda' = v - z             (new check state, Q3.7)
//     m       = 2z - v            (CN-to-VN messages, Q3.7)
// v is formed exactly (9 fraction bits); lambda' and m are truncated toward
// minus infinity to 7 fraction bits and saturated to the 11-bit range.
// The node also reports unsat_o, the parity of the hard decisions
// (x_k > 1/2) of its inputs; a 0 from every check in an iteration means the
// current estimates form a codeword, which the controller may use to stop.
//
// Timing: input stage, projection (admm_pp_project), output stage, padded
// with a delay line to LATENCY cycles, by default the depth the paper reports
// for a node of this degree. One check per clock.
module admm_check_node
  import admm_pkg::*;
#(
  parameter int DEG     = 5,
  parameter int LATENCY = cn_latency(DEG)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    valid_i,
  input  logic [DEG-1:0][V_W-1:0] x_i,
  input  logic [DEG-1:0][C_W-1:0] lam_i,
  output logic                    valid_o,
  output logic [DEG-1:0][C_W-1:0] lam_o,
  output logic [DEG-1:0][C_W-1:0] m_o,
  output logic                    unsat_o,
  output logic                    flipped_o,
  output logic                    on_facet_o
);
  localparam int LG     = $clog2(DEG);
  localparam int PP_LAT = 7 + LG * (LG + 1) / 2 + LG;
  localparam int CORE   = PP_LAT + 2;
  localparam int TW     = DEG * CN_VW + 1;
  localparam int OW     = CN_VW + 2;   // width of v - z and 2z - v

  if (LATENCY < CORE) begin : g_bad_latency
    $error("admm_check_node: LATENCY must be at least %0d", CORE);
  end

  // saturate a 9-fraction-bit value to Q3.7, truncating toward -inf
  function automatic logic [C_W-1:0] to_q37(input logic signed [OW-1:0] a);
    logic signed [OW-1:0] s;
    s = a >>> (V_F - C_F);
    if (s > OW'((1 << (C_W - 1)) - 1))  return {1'b0, {(C_W-1){1'b1}}};
    if (s < -OW'(1 << (C_W - 1)))       return {1'b1, {(C_W-1){1'b0}}};
    return C_W'(s);
  endfunction

  // ---------------- input stage: v = x + lambda
  logic [DEG-1:0][CN_VW-1:0] v1;
  logic                      unsat1, valid1;

  always_ff @(posedge clk) begin
    logic par;
    par = 1'b0;
    for (int k = 0; k < DEG; k++) begin
      v1[k] <= CN_VW'($signed(x_i[k])) + (CN_VW'($signed(lam_i[k])) <<< (V_F - C_F));
      par ^= ($signed(x_i[k]) > $signed(V_W'(V_HALF)));
    end
    unsat1 <= par;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) valid1 <= 1'b0;
    else        valid1 <= valid_i;
  end

  // ---------------- projection
  logic [DEG-1:0][V_W-1:0]   z2;
  logic [DEG-1:0][CN_VW-1:0] v2;
  logic                      unsat2, valid2, flip2, facet2;

  admm_pp_project #(.D(DEG), .W_IN(CN_VW), .TAG_W(TW)) u_pp (
    .clk, .rst_n,
    .valid_i   (valid1),
    .v_i       (v1),
    .tag_i     ({unsat1, v1}),
    .valid_o   (valid2),
    .z_o       (z2),
    .tag_o     ({unsat2, v2}),
    .flipped_o (flip2),
    .on_facet_o(facet2)
  );

  // ---------------- output stage: lambda' = v - z, m = 2z - v
  logic [DEG-1:0][C_W-1:0] lam3, m3;
  logic                    unsat3, flip3, facet3;

  always_ff @(posedge clk) begin
    for (int k = 0; k < DEG; k++) begin
      logic signed [OW-1:0] vv, zz;
      vv = OW'($signed(v2[k]));
      zz = OW'($signed(z2[k]));
      lam3[k] <= to_q37(vv - zz);
      m3[k]   <= to_q37((zz <<< 1) - vv);
    end
    unsat3 <= unsat2;
    flip3  <= flip2;
    facet3 <= facet2;
  end

  admm_delay #(.W(2 * DEG * C_W + 3), .N(LATENCY - CORE)) u_pad (
    .clk,
    .d({lam3, m3, unsat3, flip3, facet3}),
    .q({lam_o, m_o, unsat_o, flipped_o, on_facet_o})
  );

  logic valid3;
  always_ff @(posedge clk) begin
    if (!rst_n) valid3 <= 1'b0;
    else        valid3 <= valid2;
  end
  admm_valid_delay #(.N(LATENCY - CORE)) u_vld (.clk, .rst_n, .d(valid3), .q(valid_o));
endmodule
