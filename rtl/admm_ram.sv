// admm_ram: simple dual-port RAM, one synchronous write port and one
// synchronous read port (read data appears one cycle after the address), as
// an FPGA block RAM provides. The decoder uses it directly as the per-column
// LLR memory and inside the other memories. Reading and writing the same
// address in one cycle returns the old word. The array is not reset.
// The paper maps all memories onto on-chip FPGA block RAMs; the port
// arrangement and one-cycle read latency here are this design's choice.
module admm_ram #(
  parameter int W     = 8,
  parameter int DEPTH = 31,
  localparam int AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
