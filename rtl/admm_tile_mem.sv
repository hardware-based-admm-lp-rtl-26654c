// admm_tile_mem: the memory of one p x p circulant tile of the parity-check
// matrix. One instance per non-zero tile holds, for the VN-to-CN, CN-to-VN
// and check-state memories alike, the p messages that cross that tile.
//
// The writer presents the logical index k of the node it served (variable or
// check index inside its proto-column or proto-row); the word is stored at
// (k + OFFSET) mod P. With OFFSET = p - shift the VN-to-CN memory is indexed
// by check, with OFFSET = shift the CN-to-VN memory is indexed by variable,
// and with OFFSET = 0 the check-state memory needs no shifting, so every
// reader walks plain addresses 0..p-1.
//
// rd_init selects INIT instead of the stored word for that read: this gives
// the algorithm's initial values (CN-to-VN messages 1/2, check states 0) in
// the first iteration without a p-cycle clearing pass. Read latency is one
// cycle.
// Following the paper: one memory per shifted-identity tile, shift-based
// addressing on the VN-to-CN and CN-to-VN memories, none on the check-state
// memories. This design's choice: shifting on the write side, the shift
// direction, and the read override in place of initialising the memories.
module admm_tile_mem #(
  parameter int          W      = 11,
  parameter int          P      = 31,
  parameter int          OFFSET = 0,
  parameter logic [W-1:0] INIT  = '0,
  localparam int         AW     = (P > 1) ? $clog2(P) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] widx,
  input  logic [W-1:0]  wdata,
  input  logic          re,
  input  logic          rd_init,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata
);
  localparam int OFS = ((OFFSET % P) + P) % P;

  logic [AW:0]   wsum;
  logic [AW-1:0] waddr;
  logic [W-1:0]  ram_q;
  logic          init_q;

  // (widx + OFS) mod P, both operands below P
  always_comb begin
    wsum  = {1'b0, widx} + (AW+1)'(OFS);
    waddr = (wsum >= (AW+1)'(P)) ? AW'(wsum - (AW+1)'(P)) : wsum[AW-1:0];
  end

  admm_ram #(.W(W), .DEPTH(P)) u_ram (
    .clk, .we, .waddr, .wdata, .re, .raddr, .rdata(ram_q)
  );

  always_ff @(posedge clk) if (re) init_q <= rd_init;

  assign rdata = init_q ? INIT : ram_q;
endmodule
