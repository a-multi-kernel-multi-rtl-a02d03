// cb_mixed: binary-ternary mixed combine block (combinational).
// sel = 0: comb^b, y = {0, b1, b0^b1} with b0 = beta_l, b1 = beta_r.
// sel = 1: comb^t, y = {b0^b1^b2, b0^b2, b0^b1} with b0 = beta_l, b1 = beta_c,
//          b2 = beta_r, i.e. (comb^b)&~sel | (comb^t)&sel as in the architecture.
// Bit k of y is output k of the kernel, adjacent in the bit-reversed layout.
module cb_mixed (
  input  logic       b0,
  input  logic       b1,
  input  logic       b2,
  input  logic       sel,
  output logic [2:0] y
);
  logic [2:0] comb_b, comb_t;
  always_comb begin
    comb_b = {1'b0, b1, b0 ^ b1};
    comb_t = {b0 ^ b1 ^ b2, b0 ^ b2, b0 ^ b1};
    y = sel ? comb_t : comb_b;
  end
endmodule
