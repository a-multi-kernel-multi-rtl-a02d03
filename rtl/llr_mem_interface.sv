// llr_mem_interface: builds the write word of the Internal LLR RAM.
//
// A word holds 2P LLRs, but one step of the processing unit yields P results in a
// binary stage and PBT = 2P/3 in a ternary one, so a word is filled over two or
// three consecutive steps. part is the index of the step within its word:
//   binary  part 0: {0 (PQ bits), bin}        part 1: {bin, byp[PQ-1:0]}
//   ternary part 0: {0 (2PBT Q bits), tern}   part 1: {0, tern, byp[PBT Q-1:0]}
//                                             part 2: {tern, byp[2PBT Q-1:0]}
// byp is the LLR bypass register, which holds the word written in the previous
// cycle, so the results already stored are rewritten unchanged. Lower LLR indices
// sit at lower bit positions. The padding/merge scheme follows the architecture;
// the bit order is this design's. Combinational.
module llr_mem_interface #(
  parameter int P = 120,
  parameter int Q = 7,
  localparam int PBT = 2 * P / 3,
  localparam int W = 2 * P * Q
) (
  input  logic                  tern,
  input  logic [1:0]            part,
  input  logic [P*Q-1:0]        llr_bin_out,
  input  logic [PBT*Q-1:0]      llr_tern_out,
  input  logic [W-1:0]          byp_q,
  output logic [W-1:0]          wdata
);
  localparam int TQ = PBT * Q;
  localparam int BQ = P * Q;

  logic [W-1:0] w_bin, w_tern;

  always_comb begin
    w_bin = (part[0]) ? {llr_bin_out, byp_q[BQ-1:0]} : {{BQ{1'b0}}, llr_bin_out};
    unique case (part)
      2'd1:    w_tern = {{TQ{1'b0}}, llr_tern_out, byp_q[TQ-1:0]};
      2'd2:    w_tern = {llr_tern_out, byp_q[2*TQ-1:0]};
      default: w_tern = {{(2*TQ){1'b0}}, llr_tern_out};
    endcase
    wdata = tern ? w_tern : w_bin;
  end
endmodule
