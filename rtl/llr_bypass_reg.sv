// llr_bypass_reg: bypass register of the Internal LLR RAM (2PQ bits).
// The RAM has a registered read, so a word written in cycle j is only readable
// from cycle j+2. This register keeps the last written word and its address; if
// the address the RAM is reading in the same cycle (raddr_next, whose data appears
// next cycle) equals the write address, rdata returns the register instead of the
// stale RAM output in the following cycle. byp_q, the last written word, also
// feeds the partial-word merge of the LLR memory interface. The bypass function
// follows the architecture; detection by address comparison is this design's.
module llr_bypass_reg #(
  parameter int W  = 1680,
  parameter int AW = 5
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic [AW-1:0] raddr_next,
  input  logic [W-1:0]  ram_rdata,
  output logic [W-1:0]  rdata,
  output logic [W-1:0]  byp_q
);
  logic hit_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hit_q <= 1'b0;
      byp_q <= '0;
    end else begin
      hit_q <= we && (waddr == raddr_next);
      if (we) byp_q <= wdata;
    end
  end

  assign rdata = hit_q ? byp_q : ram_rdata;
endmodule
