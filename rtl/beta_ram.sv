// beta_ram: Internal beta RAM, three banks of 2P-bit words sharing one write bus.
// bank0 holds beta_0 (beta^l of binary and ternary nodes), bank1 beta_1 (beta^r of
// binary nodes, beta^c of ternary ones), bank2 beta_2 (beta^r of ternary nodes).
// Each bank has depth sum_{s=0}^{log2(Nmax)-1} ceil(Nmax/(2^s 2P)), as sized by
// the architecture. we selects the bank(s) written at waddr; the three banks are
// read in parallel at one address and the words appear on rdata one cycle later
// (registered read). The shared read address is this design's choice: every
// operation reads the same word of the children's region in each bank.
module beta_ram
  import polar_pkg::*;
#(
  parameter int NMAX = 4096,
  parameter int P = 120,
  localparam int W = 2 * P,
  localparam int D = d_beta_int(NMAX, P),
  localparam int AW = (D > 1) ? $clog2(D) : 1
) (
  input  logic                clk,
  input  logic [2:0]          we,
  input  logic [AW-1:0]       waddr,
  input  logic [W-1:0]        wdata,
  input  logic [AW-1:0]       raddr,
  output logic [2:0][W-1:0]   rdata
);
  logic [W-1:0] bank0 [D];
  logic [W-1:0] bank1 [D];
  logic [W-1:0] bank2 [D];

  always_ff @(posedge clk) begin
    if (we[0]) bank0[waddr] <= wdata;
    if (we[1]) bank1[waddr] <= wdata;
    if (we[2]) bank2[waddr] <= wdata;
    rdata[0] <= bank0[raddr];
    rdata[1] <= bank1[raddr];
    rdata[2] <= bank2[raddr];
  end
endmodule
