// tb_admm_pp_project: projects random points (one per clock) onto the parity
// polytope of dimension 5 and 16 and compares with a double-precision
// projection, allowing 3 LSBs (2^-9) per coordinate. The inputs are drawn so
// that all paths occur: cube clip inside the polytope, projection onto a
// facet, and the cut-search parity flip; each path is counted and must occur.
// Also checks the pipeline depth (16 cycles for D=5, 21 for D=16) and that
// the tag travels with its vector.
module tb_admm_pp_project;
  import tb_admm_ref_pkg::*;
  localparam int N = 600;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  int n_flip = 0, n_facet = 0, n_inside = 0;

  logic              vi5 = 0, vo5, fl5, fa5;
  logic [4:0][13:0]  v5 = '0;
  logic [4:0][10:0]  z5;
  logic [15:0]       tg5i = '0, tg5o;
  logic              vi16 = 0, vo16, fl16, fa16;
  logic [15:0][13:0] v16 = '0;
  logic [15:0][10:0] z16;
  logic [15:0]       tg16i = '0, tg16o;

  admm_pp_project #(.D(5),  .TAG_W(16)) u5  (.clk, .rst_n, .valid_i(vi5),  .v_i(v5),  .tag_i(tg5i),  .valid_o(vo5),  .z_o(z5),  .tag_o(tg5o),  .flipped_o(fl5),  .on_facet_o(fa5));
  admm_pp_project #(.D(16), .TAG_W(16)) u16 (.clk, .rst_n, .valid_i(vi16), .v_i(v16), .tag_i(tg16i), .valid_o(vo16), .z_o(z16), .tag_o(tg16o), .flipped_o(fl16), .on_facet_o(fa16));

  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc++;

  typedef struct { real v[]; int t; } item_t;
  item_t q5 [$], q16 [$];

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [13:0] rnd_v(input int mode);
    int r;
    case (mode)
      0: r = int'($urandom % 513);                 // inside the cube
      1: r = int'($urandom % 1024) - 256;          // [-0.5, 1.5)
      default: r = int'($urandom % 8192) - 4096;   // [-8, 8)
    endcase
    return 14'(r);
  endfunction

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < N; n++) begin
      item_t a, b;
      int mode;
      mode = n % 3;
      @(negedge clk);
      vi5 = 1; vi16 = 1;
      a.v = new[5]; b.v = new[16];
      for (int i = 0; i < 5; i++)  begin v5[i]  = rnd_v(mode); a.v[i] = fx(longint'(v5[i]), 14, 9); end
      for (int i = 0; i < 16; i++) begin v16[i] = rnd_v(mode); b.v[i] = fx(longint'(v16[i]), 14, 9); end
      tg5i = 16'(n); tg16i = 16'(n);
      a.t = cyc; b.t = cyc;
      q5.push_back(a); q16.push_back(b);
    end
    @(negedge clk); vi5 = 0; vi16 = 0;
  end

  int got5 = 0, got16 = 0;

  task automatic check_one(input item_t it, input logic [15:0][10:0] z, input int d,
                           input bit fl, input bit fa, input int lat, input logic [15:0] tag,
                           input int idx);
    real zr[];
    bit  rfl, rfa;
    pp_project(it.v, zr, rfl, rfa);
    for (int i = 0; i < d; i++) begin
      checks++;
      if (absr(fx(longint'(z[i]), 11, 9) - zr[i]) > 3.0 / 512.0) begin
        failures++;
        if (failures < 10) $display("D=%0d i=%0d got %f exp %f (v=%f)", d, i, fx(longint'(z[i]), 11, 9), zr[i], it.v[i]);
      end
    end
    checks += 3;
    if (fl !== rfl) failures++;
    if (cyc - it.t != lat) begin failures++; if (failures < 10) $display("latency %0d", cyc - it.t); end
    if (tag !== 16'(idx)) failures++;
    if (fl) n_flip++;
    if (fa) n_facet++; else n_inside++;
  endtask

  always @(negedge clk) begin
    if (rst_n && vo5) begin
      logic [15:0][10:0] z;
      z = '0;
      for (int i = 0; i < 5; i++) z[i] = z5[i];
      check_one(q5.pop_front(), z, 5, fl5, fa5, 16, tg5o, got5);
      got5++;
    end
    if (rst_n && vo16) begin
      check_one(q16.pop_front(), z16, 16, fl16, fa16, 21, tg16o, got16);
      got16++;
    end
    if (got5 == N && got16 == N) begin
      checks += 3;
      if (n_flip == 0)   failures++;
      if (n_facet == 0)  failures++;
      if (n_inside == 0) failures++;
      $display("paths: flip=%0d facet=%0d inside=%0d", n_flip, n_facet, n_inside);
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end
endmodule
