// cb_bin: binary combine block. comb^b of one pair of partial sums:
// y[0] = beta_l xor beta_r (beta_i), y[1] = beta_r (beta_{i+Ns/2}); in the
// bit-reversed layout the two outputs are adjacent. Combinational; follows the
// architecture's XOR definition.
module cb_bin (
  input  logic       b0,
  input  logic       b1,
  output logic [1:0] y
);
  assign y = {b1, b0 ^ b1};
endmodule
