// codeword_ram: Codeword RAM. Collects the decided bits u_hat, one per leaf, in
// decoding order: bit i lives in word i / W_COD, position i % W_COD. Width W_COD
// is a free design choice (32 here); depth ceil(Nmax/W_COD) as in the
// architecture. The decoder writes one bit per cycle (we, wbit_idx, wbit); the
// host reads whole words through a registered read port (data one cycle after
// raddr). Bit-granular writes and the host port are this design's choices.
module codeword_ram
  import polar_pkg::*;
#(
  parameter int NMAX = 4096,
  parameter int W_COD = 32,
  localparam int D = ceil_div(NMAX, W_COD),
  localparam int AW = (D > 1) ? $clog2(D) : 1,
  localparam int IW = $clog2(NMAX),
  localparam int BW = (W_COD > 1) ? $clog2(W_COD) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [IW-1:0]    wbit_idx,
  input  logic             wbit,
  input  logic [AW-1:0]    raddr,
  output logic [W_COD-1:0] rdata
);
  logic [W_COD-1:0] mem [D];
  logic [AW-1:0]    w_word;
  logic [BW-1:0]    w_pos;

  assign w_word = AW'(wbit_idx / IW'(W_COD));
  assign w_pos  = BW'(wbit_idx % IW'(W_COD));

  always_ff @(posedge clk) begin
    if (we) mem[w_word][w_pos] <= wbit;
    rdata <= mem[raddr];
  end
endmodule
