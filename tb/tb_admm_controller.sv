// tb_admm_controller: runs the sequencer with small latencies and checks
// the phase pattern of every iteration (P VN read addresses 0..P-1, then P
// CN read addresses 0..P-1, with the drains between), the iteration length
// 2P + VN_LAT + CN_LAT + 5, first_iter, stopping at the iteration cap, and
// the early stop when no check reports a violation.
module tb_admm_controller;
  localparam int P = 7, VL = 4, CL = 9;
  logic clk = 0, rst_n = 0, start = 0, et = 0, uv = 0, ui = 0;
  logic [15:0] max_iter = 16'd3, iters;
  logic busy, done, first, vn_en, cn_en, estop;
  logic [2:0] addr;
  int checks = 0, failures = 0;

  admm_controller #(.P(P), .VN_LAT(VL), .CN_LAT(CL)) dut (
    .clk, .rst_n, .start, .max_iter, .early_term_en(et), .unsat_valid_i(uv), .unsat_i(ui),
    .busy, .done, .iters_o(iters), .first_iter(first), .vn_rd_en(vn_en), .cn_rd_en(cn_en),
    .rd_addr(addr), .early_stop_o(estop)
  );

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // run one decode; unsat_mask[i] = 1 makes iteration i report a violation
  task automatic run(input int cap, input bit early, input bit [7:0] unsat_mask,
                     input int exp_iters);
    int vn_seen, cn_seen, cyc, first_vn, iter_len [$];
    int it;
    @(negedge clk);
    max_iter = 16'(cap); et = early; start = 1;
    @(negedge clk);
    start = 0;
    vn_seen = 0; cn_seen = 0; cyc = 0; it = 0; first_vn = -1;
    while (!done && cyc < 2000) begin
      if (vn_en) begin
        chk(addr == 3'(vn_seen % P), "VN address order");
        chk(first == (it == 0), "first_iter flag");
        if (vn_seen % P == 0) begin
          if (first_vn >= 0) iter_len.push_back(cyc - first_vn);
          first_vn = cyc;
        end
        vn_seen++;
      end
      if (cn_en) begin
        chk(addr == 3'(cn_seen % P), "CN address order");
        chk(!vn_en, "phases exclusive");
        cn_seen++;
      end
      // an unsat report inside the CN drain of iteration it
      uv = cn_en; ui = cn_en && unsat_mask[it];
      if (cn_en && cn_seen % P == 0) it++;
      @(negedge clk);
      cyc++;
    end
    uv = 0; ui = 0;
    chk(done, "done reached");
    chk(int'(iters) == exp_iters, $sformatf("iterations %0d exp %0d", iters, exp_iters));
    chk(vn_seen == exp_iters * P, "VN reads");
    chk(cn_seen == exp_iters * P, "CN reads");
    chk(estop == (early && exp_iters < cap), "early stop flag");
    foreach (iter_len[i]) chk(iter_len[i] == 2 * P + VL + CL + 5, $sformatf("iteration length %0d", iter_len[i]));
  endtask


  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(3, 0, 8'hFF, 3);     // stops at the cap
    run(5, 1, 8'b0000_0011, 3); // violations in iterations 1 and 2, clean in 3
    run(0, 0, 8'hFF, 1);     // cap 0 runs one iteration
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
