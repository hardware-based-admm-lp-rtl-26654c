// tb_admm_wigig: end-to-end test of the decoder configured for the
// [672,546] rate-13/16 IEEE 802.11ad (WiGig) code: p = 42, 3 proto-rows,
// 16 proto-columns with all-zero tiles, giving variable nodes of degree 3,
// 2 and 1 and check nodes of degree 14, 15 and 16. As the Tanner-code test,
// it row-reduces the parity-check matrix, decodes noisy random codewords with
// wrongly signed bits and checks the decoded words, the iteration length
// (2p + 10 + 54 + 5 = 153 cycles, set by the deepest nodes), stopping at the
// cap and early termination.
module tb_admm_wigig;
  import admm_pkg::*;
  localparam int P = WIGIG_P, R = WIGIG_R, S = WIGIG_S;
  localparam int N = P * S, M = P * R;
  localparam int ITER_CYC = 2 * P + 10 + 54 + 5;

  logic clk = 0, rst_n = 0;
  logic llr_we = 0, start = 0, early_term_en = 0, est_re = 0;
  logic [3:0] llr_col = '0, est_col = '0;
  logic [5:0] llr_addr = '0, est_addr = '0;
  logic [7:0] llr_data = '0;
  logic [15:0] max_iter = '0, iterations;
  logic busy, done, early_stop, est_bit, cn_flip_any, cn_facet_any;
  logic [10:0] est_x;

  admm_lp_decoder #(.P(P), .R(R), .S(S), .SHIFT(WIGIG_SHIFT)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_early = 0, n_cap = 0, n_flip = 0, n_facet = 0, n_corrected = 0;
  always @(posedge clk) begin
    if (cn_flip_any)  n_flip++;
    if (cn_facet_any) n_facet++;
  end

  initial begin
    #20ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // ------------------------------------------------------------ code
  bit H [M][N];
  bit A [M][N];      // row-reduced copy
  int pivot_col [M];
  bit is_pivot [N];
  int rank;

  function automatic void build_h();
    for (int r = 0; r < M; r++) for (int c = 0; c < N; c++) H[r][c] = 0;
    for (int t = 0; t < R; t++)
      for (int c = 0; c < S; c++)
        if (WIGIG_SHIFT[t][c] != NO_TILE)
          for (int k = 0; k < P; k++)
            H[t * P + k][c * P + (k + int'(WIGIG_SHIFT[t][c])) % P] = 1;
  endfunction

  function automatic void reduce();
    int row = 0;
    A = H;
    for (int c = 0; c < N; c++) is_pivot[c] = 0;
    for (int c = 0; c < N && row < M; c++) begin
      int pr = -1;
      for (int r = row; r < M; r++) if (A[r][c]) begin pr = r; break; end
      if (pr < 0) continue;
      for (int j = 0; j < N; j++) begin bit tmp = A[row][j]; A[row][j] = A[pr][j]; A[pr][j] = tmp; end
      for (int r = 0; r < M; r++)
        if (r != row && A[r][c]) for (int j = 0; j < N; j++) A[r][j] ^= A[row][j];
      pivot_col[row] = c;
      is_pivot[c] = 1;
      row++;
    end
    rank = row;
  endfunction

  // random codeword; density = percent of free bits set
  function automatic void codeword(output bit x [N], input int density);
    for (int c = 0; c < N; c++) x[c] = is_pivot[c] ? 1'b0 : 1'(($urandom % 100) < density);
    for (int r = rank - 1; r >= 0; r--) begin
      bit b = 0;
      for (int j = pivot_col[r] + 1; j < N; j++) if (!is_pivot[j]) b ^= A[r][j] & x[j];
      x[pivot_col[r]] = b;
    end
  endfunction

  function automatic bit syndrome_ok(input bit x [N]);
    for (int r = 0; r < M; r++) begin
      bit s = 0;
      for (int c = 0; c < N; c++) s ^= H[r][c] & x[c];
      if (s) return 0;
    end
    return 1;
  endfunction

  // ------------------------------------------------------------ channel
  function automatic logic [7:0] llr_of(input bit b, input int noise_amp, input bit wrong);
    int v;
    v = 48;
    if (noise_amp > 0)
      v += int'($urandom % (2 * noise_amp + 1)) + int'($urandom % (2 * noise_amp + 1))
         + int'($urandom % (2 * noise_amp + 1)) - 3 * noise_amp;
    if (wrong) v = -((v < 0) ? -v : v) / 2 - 8;   // confidently wrong bit
    if (b) v = -v;                                // bit 1 has negative LLR
    if (v > 127)  v = 127;
    if (v < -128) v = -128;
    return 8'(v);
  endfunction

  // ------------------------------------------------------------ one decode
  task automatic decode(input bit x [N], input int noise_amp, input int n_wrong,
                        input int cap, input bit early, input bit expect_success,
                        input string name);
    bit wrong [N];
    bit got [N];
    int errs, cyc, wrong_ok;
    for (int c = 0; c < N; c++) wrong[c] = 0;
    for (int w = 0; w < n_wrong; w++) wrong[$urandom % N] = 1;
    // load LLRs
    for (int c = 0; c < N; c++) begin
      @(negedge clk);
      llr_we = 1; llr_col = 4'(c / P); llr_addr = 6'(c % P);
      llr_data = llr_of(x[c], noise_amp, wrong[c]);
    end
    @(negedge clk);
    llr_we = 0;
    max_iter = 16'(cap); early_term_en = early; start = 1;
    @(negedge clk);
    start = 0;
    cyc = 0;
    while (!done && cyc < 100 * ITER_CYC + 600 * ITER_CYC) begin
      @(negedge clk);
      cyc++;
    end
    chk(done, {name, ": done"});
    chk(cyc == int'(iterations) * ITER_CYC,
        $sformatf("%s: %0d cycles for %0d iterations, expected %0d", name, cyc, iterations,
                  int'(iterations) * ITER_CYC));
    if (early_stop) begin
      n_early++;
      chk(int'(iterations) <= cap, {name, ": early stop within cap"});
    end else begin
      n_cap++;
      chk(int'(iterations) == ((cap == 0) ? 1 : cap), {name, ": stopped at cap"});
    end
    // read back
    errs = 0;
    for (int c = 0; c < N; c++) begin
      est_re = 1; est_col = 4'(c / P); est_addr = 6'(c % P);
      @(negedge clk);
      got[c] = est_bit;
      if (est_bit != x[c]) errs++;
    end
    est_re = 0;
    if (expect_success) begin
      chk(errs == 0, $sformatf("%s: %0d bit errors after %0d iterations", name, errs, iterations));
      wrong_ok = 0;
      for (int c = 0; c < N; c++) if (wrong[c]) wrong_ok++;
      if (errs == 0 && wrong_ok > 0) n_corrected++;
    end
    if (early_stop) chk(syndrome_ok(got), {name, ": early stop on a codeword"});
    $display("%s: iterations=%0d early=%0d bit errors=%0d", name, iterations, early_stop, errs);
  endtask

  initial begin
    bit x [N];
    build_h();
    reduce();
    $display("H: %0d x %0d, rank %0d", M, N, rank);
    chk(N - rank >= 546, "code dimension at least 546");
    repeat (4) @(negedge clk);
    rst_n = 1;

    // clean channel, all-zero codeword
    for (int c = 0; c < N; c++) x[c] = 0;
    decode(x, 0, 0, 50, 1, 1, "all-zero clean");

    // high-weight codewords, noisy, with confidently wrong bits
    for (int n = 0; n < 4; n++) begin
      codeword(x, 50 + 10 * n);
      chk(syndrome_ok(x), "generated codeword satisfies H");
      decode(x, 12, 2 + n, 200, 1, 1, $sformatf("noisy codeword %0d", n));
    end

    // iteration cap without early termination
    codeword(x, 70);
    decode(x, 12, 2, 3, 0, 0, "cap 3");

    // paper setting: 500 iterations, no early termination
    codeword(x, 60);
    decode(x, 16, 3, 500, 0, 1, "500 iterations");

    checks += 5;
    if (n_early == 0)     begin failures++; $display("FAIL: no early stop"); end
    if (n_cap == 0)       begin failures++; $display("FAIL: no stop at cap"); end
    if (n_flip == 0)      begin failures++; $display("FAIL: no cut-search flip"); end
    if (n_facet == 0)     begin failures++; $display("FAIL: no facet projection"); end
    if (n_corrected == 0) begin failures++; $display("FAIL: no corrected errors"); end
    $display("mechanisms: early=%0d cap=%0d flip_cycles=%0d facet_cycles=%0d corrected=%0d",
             n_early, n_cap, n_flip, n_facet, n_corrected);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
