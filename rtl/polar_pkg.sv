// polar_pkg: types and constants shared by the multi-kernel polar decoder.
//
// LLRs are sign-magnitude numbers of Q bits: the MSB is the sign (1 = negative),
// the other Q-1 bits the magnitude. A stage is binary (kernel T2, radix 2) or
// ternary (kernel T3, radix 3). The PE operation code names the child whose input
// LLRs are being produced: F for the first child, G for the second (g^b or g1^t),
// G2 for the third (g2^t, ternary only).
//
// The depth functions reproduce the memory sizing formulas of the architecture:
// channel LLR RAM ceil(Nmax/2P) words, internal LLR RAM one region per tree depth
// below the root and above the leaves, beta RAM one region per depth including the
// root's. The per-stage code-parameter record (stage_cfg_t) is this design's own
// layout of the "code parameters" register set.
package polar_pkg;

  typedef enum logic [1:0] {
    OP_F  = 2'd0,
    OP_G  = 2'd1,
    OP_G2 = 2'd2
  } pe_op_e;

  // Width of step counts and memory offsets in the code-parameter record.
  localparam int OFFW = 10;

  typedef struct packed {
    logic            tern;      // 1: ternary kernel at this depth
    logic [OFFW-1:0] steps;     // ceil(N_d / 2P): cycles per operation at this depth
    logic [OFFW-1:0] llr_off;   // first Internal LLR RAM word of the depth-d LLR vector
    logic [OFFW-1:0] beta_off;  // first beta RAM word of the depth-d beta vectors
  } stage_cfg_t;

  function automatic int ceil_div(input int a, input int b);
    return (a + b - 1) / b;
  endfunction

  function automatic int d_llr_ch(input int nmax, input int p);
    return ceil_div(nmax, 2 * p);
  endfunction

  // sum_{s=1}^{log2(Nmax)-1} ceil(Nmax / (2^s * 2P))
  function automatic int d_llr_int(input int nmax, input int p);
    int acc;
    acc = 0;
    for (int s = 1; s < $clog2(nmax); s++) acc += ceil_div(nmax >> s, 2 * p);
    return acc;
  endfunction

  // sum_{s=0}^{log2(Nmax)-1} ceil(Nmax / (2^s * 2P))
  function automatic int d_beta_int(input int nmax, input int p);
    int acc;
    acc = 0;
    for (int s = 0; s < $clog2(nmax); s++) acc += ceil_div(nmax >> s, 2 * p);
    return acc;
  endfunction

endpackage
