// beta_bypass_reg: bypass register of the Internal beta RAM (2P bits, one
// register for the three banks). It keeps the last word written, the bank it went
// to and its address. If a bank is read at that address in the same cycle (its
// data appears next cycle), that bank's rdata is replaced by the register in the
// next cycle, so a partial sum computed in cycle j can be used in cycle j+1. At
// most one bank is written per cycle by the decoder. Bypass function per the
// architecture; hit detection by address comparison is this design's.
module beta_bypass_reg #(
  parameter int W  = 240,
  parameter int AW = 6
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [2:0]        we,
  input  logic [AW-1:0]     waddr,
  input  logic [W-1:0]      wdata,
  input  logic [AW-1:0]     raddr_next,
  input  logic [2:0][W-1:0] ram_rdata,
  output logic [2:0][W-1:0] rdata
);
  logic [2:0]   hit_q;
  logic [W-1:0] byp_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hit_q <= '0;
      byp_q <= '0;
    end else begin
      hit_q <= (waddr == raddr_next) ? we : 3'b000;
      if (|we) byp_q <= wdata;
    end
  end

  always_comb
    for (int k = 0; k < 3; k++) rdata[k] = hit_q[k] ? byp_q : ram_rdata[k];
endmodule
