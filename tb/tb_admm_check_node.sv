// tb_admm_check_node: streams random checks (VN-to-CN messages x in [0,1],
// check states lambda in [-2, 2), now and then at the range ends) through a
// degree-5 check node and compares, against a double-precision model,
//   lambda' = Q3.7(v - z) and m = Q3.7(2z - v), v = x + lambda,
// within one Q3.7 LSB, and the parity of the hard decisions exactly.
// Checks the 46-cycle pipeline depth of a degree-5 node.
module tb_admm_check_node;
  import tb_admm_ref_pkg::*;
  localparam int N = 500, D = 5;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;

  logic                vi = 0, vo, unsat, flp, fct;
  logic [D-1:0][10:0]  x = '0, lam = '0, lam_o, m_o;

  admm_check_node #(.DEG(D)) dut (
    .clk, .rst_n, .valid_i(vi), .x_i(x), .lam_i(lam),
    .valid_o(vo), .lam_o(lam_o), .m_o(m_o), .unsat_o(unsat), .flipped_o(flp), .on_facet_o(fct)
  );

  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc++;

  typedef struct { real lam[D]; real m[D]; bit unsat; int t; } exp_t;
  exp_t q [$];

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < N; n++) begin
      real v[], z[];
      bit  fl, fa, par;
      exp_t e;
      @(negedge clk);
      vi = 1;
      v = new[D];
      par = 0;
      for (int i = 0; i < D; i++) begin
        x[i]   = 11'($urandom % 513);
        lam[i] = ($urandom % 10 == 0) ? 11'($urandom) : 11'($signed(11'($urandom % 512)) - 11'sd256);
        v[i]   = fx(longint'(x[i]), 11, 9) + fx(longint'(lam[i]), 11, 7);
        par   ^= (x[i] > 11'd256);
      end
      pp_project(v, z, fl, fa);
      for (int i = 0; i < D; i++) begin
        e.lam[i] = q37(v[i] - z[i]);
        e.m[i]   = q37(2.0 * z[i] - v[i]);
      end
      e.unsat = par;
      e.t = cyc;
      q.push_back(e);
    end
    @(negedge clk); vi = 0;
  end

  int got = 0;
  always @(negedge clk) begin
    if (rst_n && vo) begin
      exp_t e;
      e = q.pop_front();
      for (int i = 0; i < D; i++) begin
        checks += 2;
        if (absr(fx(longint'(lam_o[i]), 11, 7) - e.lam[i]) > 1.0 / 128.0 + 1e-9) begin
          failures++;
          if (failures < 10) $display("lambda[%0d] got %f exp %f", i, fx(longint'(lam_o[i]), 11, 7), e.lam[i]);
        end
        if (absr(fx(longint'(m_o[i]), 11, 7) - e.m[i]) > 1.0 / 128.0 + 1e-9) begin
          failures++;
          if (failures < 10) $display("m[%0d] got %f exp %f", i, fx(longint'(m_o[i]), 11, 7), e.m[i]);
        end
      end
      checks += 2;
      if (unsat !== e.unsat) failures++;
      if (cyc - e.t != 46) begin failures++; if (failures < 10) $display("latency %0d", cyc - e.t); end
      got++;
      if (got == N) begin
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    end
  end
endmodule
