// tb_admm_tile_mem: writes every logical index k of a tile memory and checks
// that word k is found at address (k + OFFSET) mod P, for the three offsets
// the decoder uses (VN-to-CN: P - shift, CN-to-VN: shift, check state: 0),
// and that rd_init returns the initial value instead of the stored word.
module tb_admm_tile_mem;
  localparam int P = 31, W = 11, AW = 5, SH = 9;
  localparam logic [W-1:0] INIT = 11'd64;
  logic clk = 0;
  int checks = 0, failures = 0;

  logic           we [3];
  logic [AW-1:0]  widx [3], raddr [3];
  logic [W-1:0]   wdata [3], rdata [3];
  logic           re [3], rd_init [3];

  admm_tile_mem #(.W(W), .P(P), .OFFSET(P - SH))          u0 (.clk, .we(we[0]), .widx(widx[0]), .wdata(wdata[0]), .re(re[0]), .rd_init(rd_init[0]), .raddr(raddr[0]), .rdata(rdata[0]));
  admm_tile_mem #(.W(W), .P(P), .OFFSET(SH), .INIT(INIT)) u1 (.clk, .we(we[1]), .widx(widx[1]), .wdata(wdata[1]), .re(re[1]), .rd_init(rd_init[1]), .raddr(raddr[1]), .rdata(rdata[1]));
  admm_tile_mem #(.W(W), .P(P), .OFFSET(0))               u2 (.clk, .we(we[2]), .widx(widx[2]), .wdata(wdata[2]), .re(re[2]), .rd_init(rd_init[2]), .raddr(raddr[2]), .rdata(rdata[2]));

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ofs [3] = '{P - SH, SH, 0};
    logic [W-1:0] data [3][P];
    for (int m = 0; m < 3; m++) begin we[m] = 0; re[m] = 0; rd_init[m] = 0; widx[m] = '0; raddr[m] = '0; wdata[m] = '0; end
    for (int k = 0; k < P; k++) begin
      @(negedge clk);
      for (int m = 0; m < 3; m++) begin
        we[m] = 1; widx[m] = AW'(k); wdata[m] = W'($urandom); data[m][k] = wdata[m];
      end
    end
    @(negedge clk);
    for (int m = 0; m < 3; m++) we[m] = 0;
    for (int a = 0; a < P; a++) begin
      for (int m = 0; m < 3; m++) begin re[m] = 1; raddr[m] = AW'(a); rd_init[m] = 0; end
      @(negedge clk);
      for (int m = 0; m < 3; m++) begin
        int k;
        k = ((a - ofs[m]) % P + P) % P;   // logical index stored at a
        checks++;
        if (rdata[m] !== data[m][k]) begin
          failures++;
          if (failures < 10) $display("mem %0d addr %0d got %h exp %h", m, a, rdata[m], data[m][k]);
        end
      end
    end
    // initial-value override
    for (int m = 0; m < 3; m++) begin re[m] = 1; raddr[m] = 5'd3; rd_init[m] = 1; end
    @(negedge clk);
    checks += 2;
    if (rdata[1] !== INIT) failures++;
    if (rdata[2] !== '0)   failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
