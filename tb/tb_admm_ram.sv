// tb_admm_ram: random writes and reads against an array model; checks the
// one-cycle read latency and read-before-write behaviour on a collision.
module tb_admm_ram;
  localparam int W = 8, DEPTH = 31, AW = 5;
  logic clk = 0, we = 0, re = 0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic [W-1:0]  wdata = '0, rdata;
  logic [W-1:0]  model [DEPTH];
  int checks = 0, failures = 0;

  admm_ram #(.W(W), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] exp_q;
    // fill
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); we = 1; waddr = AW'(a); wdata = W'($urandom); model[a] = wdata;
    end
    @(negedge clk); we = 0;
    // random mix, read result compared one cycle later
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      we = 1'($urandom); waddr = AW'($urandom % DEPTH); wdata = W'($urandom);
      re = 1; raddr = ($urandom % 4 == 0) ? waddr : AW'($urandom % DEPTH);
      exp_q = model[raddr];                     // old word on collision
      if (we) model[waddr] = wdata;
      @(negedge clk);
      we = 0; re = 0;
      checks++;
      if (rdata !== exp_q) begin
        failures++;
        if (failures < 10) $display("mismatch addr %0d got %h exp %h", raddr, rdata, exp_q);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
