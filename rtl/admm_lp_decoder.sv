// admm_lp_decoder: partially-parallel ADMM-LP decoder for a quasi-cyclic
// LDPC code (top level).
//
// The code is given by its tile size P, R proto-rows, S proto-columns and
// the shift table SHIFT[R][S] (NO_TILE for an all-zero tile; tile (t,c) with
// shift s joins check k of proto-row t to variable (k+s) mod P of proto-
// column c). The defaults are the [155,64,20] Tanner code.
//
// Structure (one box per memory/unit group of the architecture):
//   S LLR memories (depth P)    -> S variable nodes (one per proto-column)
//   S variable nodes            -> S estimate memories and, per non-zero
//                                  tile, a VN-to-CN memory written at the
//                                  shifted address (indexed by check)
//   VN-to-CN + check-state mem. -> R check nodes (one per proto-row)
//   R check nodes               -> check-state memories (same address) and
//                                  CN-to-VN memories written at the shifted
//                                  address (indexed by variable)
//   CN-to-VN memories           -> variable nodes
// An iteration is a VN phase (all P variables of every proto-column, one
// per clock) followed by a CN phase (all P checks of every proto-row).
// Tiles of weight above one (sums of several shifted identities) are not
// supported.
//
// The memory organisation and the VN/CN arrangement follow the architecture
// figure and text of the paper; the shift tables, the shift convention, the
// host interface, the monitor outputs and reset behaviour are this
// design's.
//
// Interface: while idle the host writes the LLRs of one codeword, one word
// per clock (llr_we, column llr_col, index llr_addr). start begins decoding
// with the given iteration cap; done rises when decoding stops and stays
// high until the next start. The estimates are then read through est_col /
// est_addr: est_x (Q1.9 estimate) and est_bit (hard decision) follow one
// clock later.
module admm_lp_decoder
  import admm_pkg::*;
#(
  parameter int P             = TANNER_P,
  parameter int R             = TANNER_R,
  parameter int S             = TANNER_S,
  parameter logic [0:R-1][0:S-1][7:0] SHIFT = TANNER_SHIFT,
  localparam int AW           = (P > 1) ? $clog2(P) : 1,
  localparam int CLW          = (S > 1) ? $clog2(S) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // LLR load
  input  logic              llr_we,
  input  logic [CLW-1:0]    llr_col,
  input  logic [AW-1:0]     llr_addr,
  input  logic [LLR_W-1:0]  llr_data,
  // control
  input  logic              start,
  input  logic [ITER_W-1:0] max_iter,
  input  logic              early_term_en,
  output logic              busy,
  output logic              done,
  output logic [ITER_W-1:0] iterations,
  output logic              early_stop,
  // decoded output
  input  logic              est_re,
  input  logic [CLW-1:0]    est_col,
  input  logic [AW-1:0]     est_addr,
  output logic [V_W-1:0]    est_x,
  output logic              est_bit,
  // activity of the projection units, for monitoring
  output logic              cn_flip_any,
  output logic              cn_facet_any
);
  // ---------------------------------------------------------------- code graph
  function automatic int row_deg(input int t);
    int d = 0;
    for (int c = 0; c < S; c++) if (SHIFT[t][c] != NO_TILE) d++;
    return d;
  endfunction

  function automatic int col_deg(input int c);
    int d = 0;
    for (int t = 0; t < R; t++) if (SHIFT[t][c] != NO_TILE) d++;
    return d;
  endfunction

  // column of the k-th non-zero tile of row t
  function automatic int row_col(input int t, input int k);
    int n = 0;
    for (int c = 0; c < S; c++)
      if (SHIFT[t][c] != NO_TILE) begin
        if (n == k) return c;
        n++;
      end
    return 0;
  endfunction

  // row of the k-th non-zero tile of column c
  function automatic int col_row(input int c, input int k);
    int n = 0;
    for (int t = 0; t < R; t++)
      if (SHIFT[t][c] != NO_TILE) begin
        if (n == k) return t;
        n++;
      end
    return 0;
  endfunction

  function automatic int max_vn_lat();
    int m = 0;
    for (int c = 0; c < S; c++) if (vn_latency(col_deg(c)) > m) m = vn_latency(col_deg(c));
    return m;
  endfunction

  function automatic int max_cn_lat();
    int m = 0;
    for (int t = 0; t < R; t++) if (cn_latency(row_deg(t)) > m) m = cn_latency(row_deg(t));
    return m;
  endfunction

  localparam int VN_LAT = max_vn_lat();
  localparam int CN_LAT = max_cn_lat();

  // ---------------------------------------------------------------- controller
  logic          vn_rd_en, cn_rd_en, first_iter;
  logic [AW-1:0] rd_addr;
  logic          unsat_valid, unsat_any;

  admm_controller #(.P(P), .VN_LAT(VN_LAT), .CN_LAT(CN_LAT)) u_ctrl (
    .clk, .rst_n, .start, .max_iter, .early_term_en,
    .unsat_valid_i(unsat_valid),
    .unsat_i      (unsat_any),
    .busy, .done,
    .iters_o      (iterations),
    .first_iter, .vn_rd_en, .cn_rd_en, .rd_addr,
    .early_stop_o (early_stop)
  );

  // read data arrives one clock after the address
  logic          vn_in_valid, cn_in_valid;
  logic [AW-1:0] in_addr;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      vn_in_valid <= 1'b0;
      cn_in_valid <= 1'b0;
    end else begin
      vn_in_valid <= vn_rd_en;
      cn_in_valid <= cn_rd_en;
    end
    in_addr <= rd_addr;
  end

  // ---------------------------------------------------------------- tile memories
  logic [V_W-1:0] v2c_q [R][S];   // VN-to-CN read data
  logic [C_W-1:0] c2v_q [R][S];   // CN-to-VN read data
  logic [C_W-1:0] lam_q [R][S];   // check-state read data

  // write side, driven by the node generate blocks below
  logic           v2c_we  [R][S];
  logic [AW-1:0]  v2c_idx [R][S];
  logic [V_W-1:0] v2c_d   [R][S];
  logic           cn_we   [R][S];
  logic [AW-1:0]  cn_idx  [R][S];
  logic [C_W-1:0] c2v_d   [R][S];
  logic [C_W-1:0] lam_d   [R][S];

  for (genvar t = 0; t < R; t++) begin : g_trow
    for (genvar c = 0; c < S; c++) begin : g_tcol
      if (SHIFT[t][c] != NO_TILE) begin : g_tile
        localparam int SH = int'(SHIFT[t][c]) % P;

        // VN-to-CN: written by variable i at i - shift, read by check k at k
        admm_tile_mem #(.W(V_W), .P(P), .OFFSET(P - SH)) u_v2c (
          .clk,
          .we(v2c_we[t][c]), .widx(v2c_idx[t][c]), .wdata(v2c_d[t][c]),
          .re(cn_rd_en), .rd_init(1'b0), .raddr(rd_addr), .rdata(v2c_q[t][c])
        );

        // check state: written and read by check k at k; 0 in iteration 1
        admm_tile_mem #(.W(C_W), .P(P), .OFFSET(0), .INIT('0)) u_lam (
          .clk,
          .we(cn_we[t][c]), .widx(cn_idx[t][c]), .wdata(lam_d[t][c]),
          .re(cn_rd_en), .rd_init(first_iter), .raddr(rd_addr), .rdata(lam_q[t][c])
        );

        // CN-to-VN: written by check k at k + shift, read by variable i at i;
        // 1/2 in iteration 1
        admm_tile_mem #(.W(C_W), .P(P), .OFFSET(SH), .INIT(C_W'(C_HALF))) u_c2v (
          .clk,
          .we(cn_we[t][c]), .widx(cn_idx[t][c]), .wdata(c2v_d[t][c]),
          .re(vn_rd_en), .rd_init(first_iter), .raddr(rd_addr), .rdata(c2v_q[t][c])
        );
      end else begin : g_zero
        assign v2c_q[t][c] = '0;
        assign c2v_q[t][c] = '0;
        assign lam_q[t][c] = '0;
      end
    end
  end

  // ---------------------------------------------------------------- variable side
  logic [V_W-1:0] est_x_c  [S];
  logic           est_bit_c [S];

  for (genvar c = 0; c < S; c++) begin : g_col
    localparam int DV = col_deg(c);
    localparam int LV = vn_latency(DV);

    logic [LLR_W-1:0]       llr_q;
    logic [DV-1:0][C_W-1:0] c_in;
    logic                   x_valid;
    logic [V_W-1:0]         x;
    logic [AW-1:0]          x_addr;

    admm_ram #(.W(LLR_W), .DEPTH(P)) u_llr (
      .clk,
      .we(llr_we && llr_col == CLW'(c)), .waddr(llr_addr), .wdata(llr_data),
      .re(vn_rd_en), .raddr(rd_addr), .rdata(llr_q)
    );

    for (genvar k = 0; k < DV; k++) begin : g_in
      assign c_in[k] = c2v_q[col_row(c, k)][c];
    end

    admm_var_node #(.DEG(DV), .LATENCY(LV)) u_vn (
      .clk, .rst_n,
      .valid_i(vn_in_valid), .llr_i(llr_q), .c_i(c_in),
      .valid_o(x_valid), .x_o(x)
    );

    admm_delay #(.W(AW), .N(LV)) u_addr (.clk, .d(in_addr), .q(x_addr));

    admm_estimate_mem #(.P(P)) u_est (
      .clk,
      .we(x_valid), .waddr(x_addr), .wdata(x),
      .re(est_re && est_col == CLW'(c)), .raddr(est_addr),
      .x(est_x_c[c]), .bit_o(est_bit_c[c])
    );

    for (genvar t = 0; t < R; t++) begin : g_wr
      assign v2c_we[t][c]  = x_valid;
      assign v2c_idx[t][c] = x_addr;
      assign v2c_d[t][c]   = x;
    end
  end

  // read-out multiplexer (column registered with the read)
  logic [CLW-1:0] est_col_q;
  always_ff @(posedge clk) if (est_re) est_col_q <= est_col;
  always_comb begin
    est_x   = '0;
    est_bit = 1'b0;
    for (int c = 0; c < S; c++)
      if (est_col_q == CLW'(c)) begin
        est_x   = est_x_c[c];
        est_bit = est_bit_c[c];
      end
  end

  // ---------------------------------------------------------------- check side
  logic [R-1:0] row_valid, row_unsat, row_flip, row_facet;

  for (genvar t = 0; t < R; t++) begin : g_row
    localparam int DC = row_deg(t);
    localparam int LC = cn_latency(DC);

    logic [DC-1:0][V_W-1:0] x_in;
    logic [DC-1:0][C_W-1:0] lam_in, lam_out, m_out;
    logic                   o_valid;
    logic [AW-1:0]          o_addr;

    for (genvar k = 0; k < DC; k++) begin : g_in
      assign x_in[k]   = v2c_q[t][row_col(t, k)];
      assign lam_in[k] = lam_q[t][row_col(t, k)];
    end

    admm_check_node #(.DEG(DC), .LATENCY(LC)) u_cn (
      .clk, .rst_n,
      .valid_i(cn_in_valid), .x_i(x_in), .lam_i(lam_in),
      .valid_o(o_valid), .lam_o(lam_out), .m_o(m_out),
      .unsat_o(row_unsat[t]), .flipped_o(row_flip[t]), .on_facet_o(row_facet[t])
    );

    admm_delay #(.W(AW), .N(LC)) u_addr (.clk, .d(in_addr), .q(o_addr));
    assign row_valid[t] = o_valid;

    for (genvar c = 0; c < S; c++) begin : g_wr
      if (SHIFT[t][c] != NO_TILE) begin : g_nz
        localparam int K = row_pos(t, c);
        assign cn_we[t][c]  = o_valid;
        assign cn_idx[t][c] = o_addr;
        assign lam_d[t][c]  = lam_out[K];
        assign c2v_d[t][c]  = m_out[K];
      end else begin : g_z
        assign cn_we[t][c]  = 1'b0;
        assign cn_idx[t][c] = '0;
        assign lam_d[t][c]  = '0;
        assign c2v_d[t][c]  = '0;
      end
    end
  end

  // position of column c among the non-zero tiles of row t
  function automatic int row_pos(input int t, input int c);
    int n = 0;
    for (int cc = 0; cc < c; cc++) if (SHIFT[t][cc] != NO_TILE) n++;
    return n;
  endfunction

  assign unsat_valid  = |row_valid;
  assign unsat_any    = |(row_valid & row_unsat);
  assign cn_flip_any  = |(row_valid & row_flip);
  assign cn_facet_any = |(row_valid & row_facet);
endmodule
