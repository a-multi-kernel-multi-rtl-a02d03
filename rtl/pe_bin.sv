// pe_bin: binary processing element of the polar decoder (purely combinational).
//
// Computes, on sign-magnitude LLRs alpha_a and alpha_b,
//   f^b: sign = sign(a) xor sign(b),            |f| = min(|a|,|b|)
//   g^b: (1-2*u0)*alpha_a + alpha_b, rewritten for sign-magnitude as
//        sign = gamma ? (u0 xor sign(a)) : sign(b),  gamma = |a| > |b|
//        |g|  = chi ? max - min : |a| + |b|,         chi = u0 xor sign(a) xor sign(b)
// sel_g = 0 selects f^b, 1 selects g^b. Two subtractors (|a|-|b|, |b|-|a|) give
// both the comparison and the difference, one adder gives the sum; the sum
// saturates at the largest magnitude 2^(Q-1)-1. These equations and the
// subtractor/adder/mux structure follow the architecture; the bit-level coding is
// this design's. Interface: a, b, res are Q bits, MSB = sign. No clock.
module pe_bin #(
  parameter int Q = 7
) (
  input  logic [Q-1:0] a,
  input  logic [Q-1:0] b,
  input  logic         u0,
  input  logic         sel_g,
  output logic [Q-1:0] res
);
  localparam int M = Q - 1;
  localparam logic [M-1:0] MAXMAG = '1;

  logic         sa, sb;
  logic [M-1:0] ma, mb;
  logic [M:0]   d_ab, d_ba, s_ab;   // MSB of a difference is its borrow
  logic         a_lt_b, gamma, chi;
  logic         sign_f, sign_g;
  logic [M-1:0] mag_f, mag_g, mag_sum;

  always_comb begin
    sa = a[Q-1];
    sb = b[Q-1];
    ma = a[M-1:0];
    mb = b[M-1:0];
    d_ab = {1'b0, ma} - {1'b0, mb};
    d_ba = {1'b0, mb} - {1'b0, ma};
    s_ab = {1'b0, ma} + {1'b0, mb};
    a_lt_b  = d_ab[M];                  // |a| < |b|
    gamma   = d_ba[M];                  // |a| > |b|
    chi     = u0 ^ sa ^ sb;
    mag_sum = s_ab[M] ? MAXMAG : s_ab[M-1:0];
    sign_f  = sa ^ sb;
    mag_f   = a_lt_b ? ma : mb;
    sign_g  = gamma ? (u0 ^ sa) : sb;
    mag_g   = chi ? (a_lt_b ? d_ba[M-1:0] : d_ab[M-1:0]) : mag_sum;
    res     = sel_g ? {sign_g, mag_g} : {sign_f, mag_f};
  end
endmodule
