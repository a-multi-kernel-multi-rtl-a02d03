// beta_mem_interface: read and write path of the Internal beta RAM.
//
// Read: each bank word holds 2P partial sums, but one step of the processing unit
// uses P of them (binary) or PBT = 2P/3 (ternary). part selects which slice:
//   beta0/beta1 = binary ? r_data[part*P +: P] : {0, r_data[part*PBT +: PBT]}
//   beta2       = r_data_2[part*PBT +: PBT]
// Write: w_data is the combine result (beta_bin_out or beta_tern_out by stage
// type) or, at a leaf, the decided bit u_hat padded with 2P-1 zeros.
// u_hat = hd AND NOT frozen is also the Codeword RAM write data. Structure as in
// the architecture's beta interface circuit. Combinational.
module beta_mem_interface #(
  parameter int P = 120,
  localparam int PBT = 2 * P / 3,
  localparam int W = 2 * P
) (
  input  logic [2:0][W-1:0] rdata,
  input  logic              tern,
  input  logic [1:0]        part,
  output logic [P-1:0]      beta0,
  output logic [P-1:0]      beta1,
  output logic [PBT-1:0]    beta2,
  input  logic              leaf,
  input  logic              hd,
  input  logic              frozen,
  input  logic [W-1:0]      beta_bin_out,
  input  logic [W-1:0]      beta_tern_out,
  output logic [W-1:0]      wdata,
  output logic              u_hat
);
  function automatic logic [P-1:0] slice(input logic [W-1:0] w, input logic t,
                                         input logic [1:0] pt);
    logic [PBT-1:0] s3;
    unique case (pt)
      2'd1:    s3 = w[PBT +: PBT];
      2'd2:    s3 = w[2*PBT +: PBT];
      default: s3 = w[0 +: PBT];
    endcase
    if (t) return {{(P-PBT){1'b0}}, s3};
    return pt[0] ? w[P +: P] : w[0 +: P];
  endfunction

  logic [P-1:0] b2_full;

  always_comb begin
    beta0   = slice(rdata[0], tern, part);
    beta1   = slice(rdata[1], tern, part);
    b2_full = slice(rdata[2], 1'b1, part);
    beta2   = b2_full[PBT-1:0];
    u_hat   = hd & ~frozen;
    if (leaf)      wdata = {{(W-1){1'b0}}, u_hat};
    else if (tern) wdata = beta_tern_out;
    else           wdata = beta_bin_out;
  end
endmodule
