// internal_llr_ram: Internal LLR RAM. Holds the outputs of f and g operations, 2P LLRs of
// Q bits per word. One region per tree depth below the root; only one LLR vector
// per depth is live, so the depth is sum_{s=1}^{log2(Nmax)-1} ceil(Nmax/(2^s 2P)). Separate write
// and read ports. The read is registered: the word at raddr
// appears on rdata in the next cycle, like a synchronous SRAM. Written here as a
// register array; on silicon it is an SRAM macro. Region offsets come from the code
// parameters; LLR k of a word sits at bits [kQ +: Q].
module internal_llr_ram
  import polar_pkg::*;
#(
  parameter int NMAX = 4096,
  parameter int P = 120,
  parameter int Q = 7,
  localparam int W = 2 * P * Q,
  localparam int D = d_llr_int(NMAX, P),
  localparam int AW = (D > 1) ? $clog2(D) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata
);
  logic [W-1:0] mem [D];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
