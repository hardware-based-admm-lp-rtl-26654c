// admm_estimate_mem: the estimate memory of one proto-column. The variable
// node writes its estimate x (Q1.9, in [0,1]) every iteration; after the
// decoder stops, the host reads the estimate and its hard decision, which
// is the decoded codeword bit (1 when x > 1/2). Both read outputs are valid
// one cycle after the read address.
// The paper gives the s estimate memories of depth p and their role; the
// 11-bit storage format (that of the VN-to-CN messages) and the > 1/2
// threshold are this design's choice.
module admm_estimate_mem
  import admm_pkg::*;
#(
  parameter int  P  = 31,
  localparam int AW = (P > 1) ? $clog2(P) : 1
) (
  input  logic           clk,
  input  logic           we,
  input  logic [AW-1:0]  waddr,
  input  logic [V_W-1:0] wdata,
  input  logic           re,
  input  logic [AW-1:0]  raddr,
  output logic [V_W-1:0] x,
  output logic           bit_o
);
  admm_ram #(.W(V_W), .DEPTH(P)) u_ram (
    .clk, .we, .waddr, .wdata, .re, .raddr, .rdata(x)
  );

  assign bit_o = $signed(x) > $signed(V_W'(V_HALF));
endmodule
