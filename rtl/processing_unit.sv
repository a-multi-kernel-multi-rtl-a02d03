// processing_unit: the computational core. It holds P processing elements and P
// combine blocks: the first PBT = 2P/3 of each are binary-ternary mixed, the last
// P/3 are binary-only. P must be a multiple of 3.
//
// LLR routing (2P inputs per cycle): in a binary operation PE i takes in[2i] and
// in[2i+1]; in a ternary operation mixed PE i takes in[3i], in[3i+1], in[3i+2].
// The two Q-bit input multiplexers of every mixed PE pick between these. PE i gets
// partial sums beta0[i] (u0) and beta1[i] (u1); mixed CB i gets beta0[i],
// beta1[i], beta2[i]; binary CB i gets beta0[i], beta1[i]. Outputs:
//   llr_bin_out  P LLRs (all PEs), llr_tern_out PBT LLRs (mixed PEs),
//   beta_bin_out 2P bits (two per CB), beta_tern_out 2P bits (three per mixed CB),
//   hd           MSB (sign) of llr_bin_out[0], the leaf hard decision.
// All of this follows the architecture; the unit is combinational (results are
// written to memory at the end of the cycle by the surrounding datapath).
module processing_unit
  import polar_pkg::*;
#(
  parameter int P = 120,
  parameter int Q = 7,
  localparam int PBT = 2 * P / 3
) (
  input  logic [2*P-1:0][Q-1:0] llr_in,
  input  logic [P-1:0]          beta0,
  input  logic [P-1:0]          beta1,
  input  logic [PBT-1:0]        beta2,
  input  logic                  tern,
  input  pe_op_e                op,
  output logic [P-1:0][Q-1:0]   llr_bin_out,
  output logic [PBT-1:0][Q-1:0] llr_tern_out,
  output logic                  hd,
  output logic [2*P-1:0]        beta_bin_out,
  output logic [2*P-1:0]        beta_tern_out
);
  initial assert (P % 3 == 0) else $error("P must be a multiple of 3");

  for (genvar i = 0; i < PBT; i++) begin : g_mixed
    logic [Q-1:0] pa, pb;
    logic [2:0]   cy;
    assign pa = tern ? llr_in[3*i]   : llr_in[2*i];
    assign pb = tern ? llr_in[3*i+1] : llr_in[2*i+1];
    pe_mixed #(.Q(Q)) u_pe (
      .a(pa), .b(pb), .c(llr_in[3*i+2]), .u0(beta0[i]), .u1(beta1[i]),
      .tern(tern), .op(op), .res(llr_bin_out[i])
    );
    assign llr_tern_out[i] = llr_bin_out[i];
    cb_mixed u_cb (.b0(beta0[i]), .b1(beta1[i]), .b2(beta2[i]), .sel(tern), .y(cy));
    assign beta_bin_out[2*i+1:2*i]  = cy[1:0];
    assign beta_tern_out[3*i+2:3*i] = cy;
  end

  for (genvar i = PBT; i < P; i++) begin : g_bin
    pe_bin #(.Q(Q)) u_pe (
      .a(llr_in[2*i]), .b(llr_in[2*i+1]), .u0(beta0[i]), .sel_g(op != OP_F),
      .res(llr_bin_out[i])
    );
    cb_bin u_cb (.b0(beta0[i]), .b1(beta1[i]), .y(beta_bin_out[2*i+1:2*i]));
  end

  assign hd = llr_bin_out[0][Q-1];
endmodule
