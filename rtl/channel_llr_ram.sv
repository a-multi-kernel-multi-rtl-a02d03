// channel_llr_ram: Channel LLR RAM. Holds the received LLR vector y, 2P LLRs of
// Q bits per word (the number the processing unit reads per cycle), depth
// ceil(Nmax/2P), as sized by the architecture. Separate write port (loaded by the
// host before decoding) and read port. The read is registered: the word at raddr
// appears on rdata in the next cycle, like a synchronous SRAM. Written here as a
// register array; on silicon it is an SRAM macro. Word w holds y[2Pw .. 2Pw+2P-1]
// of the bit-reversed code, LLR k at bits [kQ +: Q].
module channel_llr_ram
  import polar_pkg::*;
#(
  parameter int NMAX = 4096,
  parameter int P = 120,
  parameter int Q = 7,
  localparam int W = 2 * P * Q,
  localparam int D = d_llr_ch(NMAX, P),
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
