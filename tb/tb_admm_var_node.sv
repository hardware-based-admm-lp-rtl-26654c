// tb_admm_var_node: streams random LLRs and CN-to-VN messages through
// variable nodes of degree 3 and 1 (one per clock) and compares each output
// with the real-valued average clip((sum c - gamma)/deg, 0, 1), allowing
// three output LSBs for the truncated reciprocal. Checks that results
// appear exactly LATENCY cycles (10 and 9) after their inputs.
module tb_admm_var_node;
  import tb_admm_ref_pkg::*;
  localparam int N = 400;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;

  logic        vi3 = 0, vo3, vi1 = 0, vo1;
  logic [7:0]  llr3 = '0, llr1 = '0;
  logic [2:0][10:0] c3 = '0;
  logic [0:0][10:0] c1 = '0;
  logic [10:0] x3, x1;

  admm_var_node #(.DEG(3)) u3 (.clk, .rst_n, .valid_i(vi3), .llr_i(llr3), .c_i(c3), .valid_o(vo3), .x_o(x3));
  admm_var_node #(.DEG(1)) u1 (.clk, .rst_n, .valid_i(vi1), .llr_i(llr1), .c_i(c1), .valid_o(vo1), .x_o(x1));

  always #5 clk = ~clk;

  real exp3 [$], exp1 [$];
  int  t_in3 [$], t_in1 [$];
  int  cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real avg(input real s, input int d);
    real a = s / d;
    return (a < 0.0) ? 0.0 : (a > 1.0) ? 1.0 : a;
  endfunction

  // drive
  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < N; n++) begin
      real s;
      @(negedge clk);
      vi3 = 1; vi1 = 1;
      llr3 = 8'($urandom); llr1 = 8'($urandom);
      s = -fx(longint'(llr3), 8, 7);
      for (int k = 0; k < 3; k++) begin
        // messages mostly small, sometimes near the range ends
        c3[k] = ($urandom % 8 == 0) ? 11'($urandom) : 11'($signed(11'($urandom % 512)) - 11'sd256);
        s += fx(longint'(c3[k]), 11, 7);
      end
      exp3.push_back(avg(s, 3));
      c1[0] = 11'($signed(11'($urandom % 512)) - 11'sd256);
      exp1.push_back(avg(fx(longint'(c1[0]), 11, 7) - fx(longint'(llr1), 8, 7), 1));
      t_in3.push_back(cyc); t_in1.push_back(cyc);
    end
    @(negedge clk); vi3 = 0; vi1 = 0;
  end

  // check
  int got = 0;
  always @(negedge clk) begin
    if (rst_n && vo3) begin
      real e;
      int  t;
      e = exp3.pop_front();
      t = t_in3.pop_front();
      checks += 2;
      if (absr(fx(longint'(x3), 11, 9) - e) > 3.0 / 512.0) begin
        failures++;
        if (failures < 10) $display("deg3: got %f exp %f", fx(longint'(x3), 11, 9), e);
      end
      if (cyc - t != 10) begin failures++; if (failures < 10) $display("deg3 latency %0d", cyc - t); end
      got++;
    end
    if (rst_n && vo1) begin
      real e;
      int  t;
      e = exp1.pop_front();
      t = t_in1.pop_front();
      checks += 2;
      if (absr(fx(longint'(x1), 11, 9) - e) > 0.5 / 512.0) begin
        failures++;
        if (failures < 10) $display("deg1: got %f exp %f", fx(longint'(x1), 11, 9), e);
      end
      if (cyc - t != 9) begin failures++; if (failures < 10) $display("deg1 latency %0d", cyc - t); end
    end
    if (got == N) begin
      repeat (2) @(negedge clk);
      if (exp1.size() != 0) failures++;
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end
endmodule
