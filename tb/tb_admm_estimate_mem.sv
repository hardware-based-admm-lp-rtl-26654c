// tb_admm_estimate_mem: writes estimates in [0, 1] (with the values around
// 1/2 at every other address) and checks the stored estimate and its hard decision.
module tb_admm_estimate_mem;
  localparam int P = 31, AW = 5;
  logic clk = 0, we = 0, re = 0, bit_o;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic [10:0] wdata = '0, x;
  logic [10:0] model [P];
  int checks = 0, failures = 0;

  admm_estimate_mem #(.P(P)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < P; a++) begin
      @(negedge clk);
      we = 1; waddr = AW'(a);
      // every other word sits at the threshold: 255, 256 or 257
      wdata = (a % 2 == 0) ? 11'(255 + (a / 2) % 3) : 11'($urandom % 513);
      model[a] = wdata;
    end
    @(negedge clk); we = 0;
    for (int a = 0; a < P; a++) begin
      re = 1; raddr = AW'(a);
      @(negedge clk);
      checks += 2;
      if (x !== model[a]) failures++;
      if (bit_o !== (model[a] > 11'd256)) begin
        failures++;
        $display("addr %0d x=%0d bit=%0d", a, x, bit_o);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
