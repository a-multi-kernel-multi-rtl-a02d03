// pe_mixed: binary-ternary mixed processing element (purely combinational).
//
// One element computes any f or g operation of a binary or a ternary node on
// sign-magnitude LLRs a, b, c (c is unused by binary operations):
//   f^b  = sign(a)^sign(b),           min(|a|,|b|)
//   g^b  = (1-2u0)a + b
//   f^t  = sign(a)^sign(b)^sign(c),   min(|a|,|b|,|c|)
//   g1^t = (1-2u0)a + f^b(b,c)
//   g2^t = (1-2u0)b + (1-2(u0^u1))c
// Each g is evaluated in sign-magnitude form: the sign comes from whichever term
// has the larger magnitude (gamma), the magnitude is the sum of the two magnitudes
// when their signs agree (chi = 0) and their difference otherwise. Three adders
// (a+b, a+c, b+c) and six subtractors (a-b, b-a, a-c, c-a, b-c, c-b) are shared
// by all operations; the subtractor borrows drive the minimum selection (block M)
// and the difference muxes. Sums saturate at 2^(Q-1)-1. The equations and the
// adder/subtractor set follow the architecture; the mux coding is this design's.
// Interface: tern selects ternary operations, op selects F / G / G2 (G2 only with
// tern = 1; with tern = 0 it yields g^b). No clock.
module pe_mixed
  import polar_pkg::*;
#(
  parameter int Q = 7
) (
  input  logic [Q-1:0] a,
  input  logic [Q-1:0] b,
  input  logic [Q-1:0] c,
  input  logic         u0,
  input  logic         u1,
  input  logic         tern,
  input  pe_op_e       op,
  output logic [Q-1:0] res
);
  localparam int M = Q - 1;
  localparam logic [M-1:0] MAXMAG = '1;

  logic         sa, sb, sc;
  logic [M-1:0] ma, mb, mc;
  logic [M:0]   d_ab, d_ba, d_ac, d_ca, d_bc, d_cb, s_ab, s_ac, s_bc;
  logic         a_lt_b, a_lt_c, b_lt_c;
  logic [M-1:0] sat_ab, sat_ac, sat_bc;
  logic [M-1:0] min_ab, min_abc;
  // results of the five operations
  logic         sg_fb, sg_gb, sg_ft, sg_g1, sg_g2;
  logic [M-1:0] mg_gb, mg_g1, mg_g2;
  logic         gamma_b, gamma_1, gamma_2, chi_b, chi_1, chi_2;
  logic         c_is_min_bc;   // min(|b|,|c|) is |c|

  always_comb begin
    sa = a[Q-1];  ma = a[M-1:0];
    sb = b[Q-1];  mb = b[M-1:0];
    sc = c[Q-1];  mc = c[M-1:0];
    d_ab = {1'b0, ma} - {1'b0, mb};
    d_ba = {1'b0, mb} - {1'b0, ma};
    d_ac = {1'b0, ma} - {1'b0, mc};
    d_ca = {1'b0, mc} - {1'b0, ma};
    d_bc = {1'b0, mb} - {1'b0, mc};
    d_cb = {1'b0, mc} - {1'b0, mb};
    s_ab = {1'b0, ma} + {1'b0, mb};
    s_ac = {1'b0, ma} + {1'b0, mc};
    s_bc = {1'b0, mb} + {1'b0, mc};
    sat_ab = s_ab[M] ? MAXMAG : s_ab[M-1:0];
    sat_ac = s_ac[M] ? MAXMAG : s_ac[M-1:0];
    sat_bc = s_bc[M] ? MAXMAG : s_bc[M-1:0];
    a_lt_b = d_ab[M];
    a_lt_c = d_ac[M];
    b_lt_c = d_bc[M];

    // block M: minima selected by the subtractor borrows
    min_ab      = a_lt_b ? ma : mb;
    c_is_min_bc = d_cb[M];                     // |c| < |b|
    if (c_is_min_bc) min_abc = a_lt_c ? ma : mc;
    else             min_abc = a_lt_b ? ma : mb;

    // f^b, f^t
    sg_fb = sa ^ sb;
    sg_ft = sa ^ sb ^ sc;

    // g^b
    gamma_b = d_ba[M];                         // |a| > |b|
    chi_b   = u0 ^ sa ^ sb;
    sg_gb   = gamma_b ? (u0 ^ sa) : sb;
    mg_gb   = chi_b ? (a_lt_b ? d_ba[M-1:0] : d_ab[M-1:0]) : sat_ab;

    // g1^t: a against f^b(b,c)
    chi_1 = u0 ^ sa ^ sb ^ sc;
    if (c_is_min_bc) begin
      gamma_1 = d_ca[M];                       // |a| > |c|
      mg_g1   = chi_1 ? (a_lt_c ? d_ca[M-1:0] : d_ac[M-1:0]) : sat_ac;
    end else begin
      gamma_1 = d_ba[M];                       // |a| > |b|
      mg_g1   = chi_1 ? (a_lt_b ? d_ba[M-1:0] : d_ab[M-1:0]) : sat_ab;
    end
    sg_g1 = gamma_1 ? (u0 ^ sa) : (sb ^ sc);

    // g2^t
    gamma_2 = d_cb[M];                         // |b| > |c|
    chi_2   = u1 ^ sb ^ sc;
    sg_g2   = gamma_2 ? (u0 ^ sb) : (u0 ^ u1 ^ sc);
    mg_g2   = chi_2 ? (b_lt_c ? d_cb[M-1:0] : d_bc[M-1:0]) : sat_bc;

    unique case ({tern, op})
      {1'b0, OP_F}:  res = {sg_fb, min_ab};
      {1'b1, OP_F}:  res = {sg_ft, min_abc};
      {1'b1, OP_G}:  res = {sg_g1, mg_g1};
      {1'b1, OP_G2}: res = {sg_g2, mg_g2};
      default:       res = {sg_gb, mg_gb};
    endcase
  end
endmodule
