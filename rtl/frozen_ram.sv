// frozen_ram: Frozen Pattern RAM. One bit per leaf of the decoding tree (decoding
// order), 1 = frozen bit-channel; Nmax bits in words of W_FROZEN bits, depth
// ceil(Nmax/W_FROZEN) as in the architecture (width is a free choice, 32 here).
// The host writes whole words; the decoder reads single bits: rbit_idx selects
// leaf i, and frozen shows its bit one cycle later (registered read).
module frozen_ram
  import polar_pkg::*;
#(
  parameter int NMAX = 4096,
  parameter int W_FROZEN = 32,
  localparam int D = ceil_div(NMAX, W_FROZEN),
  localparam int AW = (D > 1) ? $clog2(D) : 1,
  localparam int IW = $clog2(NMAX),
  localparam int BW = (W_FROZEN > 1) ? $clog2(W_FROZEN) : 1
) (
  input  logic                clk,
  input  logic                we,
  input  logic [AW-1:0]       waddr,
  input  logic [W_FROZEN-1:0] wdata,
  input  logic [IW-1:0]       rbit_idx,
  output logic                frozen
);
  logic [W_FROZEN-1:0] mem [D];
  logic [W_FROZEN-1:0] word_q;
  logic [BW-1:0]       pos_q;

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    word_q <= mem[AW'(rbit_idx / IW'(W_FROZEN))];
    pos_q  <= BW'(rbit_idx % IW'(W_FROZEN));
  end
  assign frozen = word_q[pos_q];
endmodule
