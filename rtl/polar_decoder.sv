// polar_decoder: multi-kernel, multi-code semi-parallel successive-cancellation
// polar decoder for codes built from any sequence of binary (T2) and ternary (T3)
// kernels, of any length N <= NMAX, any rate and any kernel order, without
// changing the hardware.
//
// Datapath: the Channel LLR RAM (or, below the root, the Internal LLR RAM through
// its bypass register) feeds 2P LLRs per cycle to the processing unit (P PEs, 2/3
// of them binary-ternary). f/g results go back to the Internal LLR RAM through the
// LLR memory interface, which packs two (binary) or three (ternary) steps into one
// 2PQ-bit word. Combine results and leaf decisions go to the three-bank beta RAM
// through the beta memory interface and its bypass register; leaf decisions
// (hard decision AND NOT frozen) also go to the Codeword RAM. The control unit
// sequences everything from the code parameters held in code_param_regs.
//
// Host interface (all synchronous to clk, active-low asynchronous reset):
//   ch_we/ch_waddr/ch_wdata   load channel LLRs, 2P sign-magnitude Q-bit LLRs per
//                             word, LLR k of word w = y[2Pw+k] (bit-reversed order)
//   fz_we/fz_waddr/fz_wdata   load the frozen pattern, bit i = leaf i (1 = frozen)
//   cfg_we/cfg_sel/...        load code parameters (see code_param_regs)
//   start                     pulse: decode; busy is high for the L decoding cycles
//   done                      pulse after the last bit is stored
//   cw_raddr/cw_rdata         read the decoded bits (registered read), bit i of
//                             the vector = leaf i in decoding order
// The block set and connections follow the architecture's datapath; the host
// interface is this design's.
module polar_decoder
  import polar_pkg::*;
#(
  parameter int NMAX     = 4096,
  parameter int P        = 120,
  parameter int Q        = 7,
  parameter int W_COD    = 32,
  parameter int W_FROZEN = 32,
  localparam int PBT  = 2 * P / 3,
  localparam int MAXD = $clog2(NMAX),
  localparam int DW   = $clog2(MAXD + 2),
  localparam int NW   = $clog2(NMAX) + 1,
  localparam int IW   = $clog2(NMAX),
  localparam int D_CH = d_llr_ch(NMAX, P),
  localparam int D_LI = d_llr_int(NMAX, P),
  localparam int D_BI = d_beta_int(NMAX, P),
  localparam int D_CW = ceil_div(NMAX, W_COD),
  localparam int D_FZ = ceil_div(NMAX, W_FROZEN),
  localparam int CAW  = (D_CH > 1) ? $clog2(D_CH) : 1,
  localparam int LAW  = (D_LI > 1) ? $clog2(D_LI) : 1,
  localparam int BAW  = (D_BI > 1) ? $clog2(D_BI) : 1,
  localparam int CWAW = (D_CW > 1) ? $clog2(D_CW) : 1,
  localparam int FZAW = (D_FZ > 1) ? $clog2(D_FZ) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                ch_we,
  input  logic [CAW-1:0]      ch_waddr,
  input  logic [2*P*Q-1:0]    ch_wdata,
  input  logic                fz_we,
  input  logic [FZAW-1:0]     fz_waddr,
  input  logic [W_FROZEN-1:0] fz_wdata,
  input  logic                cfg_we,
  input  logic [DW-1:0]       cfg_sel,
  input  stage_cfg_t          cfg_wdata,
  input  logic [NW-1:0]       cfg_wn_len,
  input  logic [DW-1:0]       cfg_ws_m,
  input  logic                start,
  output logic                busy,
  output logic                done,
  input  logic [CWAW-1:0]     cw_raddr,
  output logic [W_COD-1:0]    cw_rdata
);
  // code parameters
  stage_cfg_t    cfg [MAXD+1];
  logic [NW-1:0] n_len;
  logic [DW-1:0] s_m;

  // control
  logic           tern, part_src_ch, ill_we, leaf, cw_we;
  pe_op_e         op;
  logic [1:0]     part;
  logic [CAW-1:0] ch_raddr;
  logic [LAW-1:0] ill_raddr, ill_waddr;
  logic [BAW-1:0] beta_raddr, beta_waddr;
  logic [2:0]     beta_we;
  logic [IW-1:0]  leaf_idx, frozen_ridx;

  // datapath
  logic [2*P*Q-1:0]           ch_rdata, ill_rdata_ram, ill_rdata, llr_byp_q, ill_wdata;
  logic [2*P-1:0][Q-1:0]      llr_in;
  logic [P-1:0][Q-1:0]        llr_bin_out;
  logic [PBT-1:0][Q-1:0]      llr_tern_out;
  logic [2:0][2*P-1:0]        beta_rdata_ram, beta_rdata;
  logic [P-1:0]               beta0, beta1;
  logic [PBT-1:0]             beta2;
  logic [2*P-1:0]             beta_bin_out, beta_tern_out, beta_wdata;
  logic                       hd, frozen, u_hat;

  code_param_regs #(.NMAX(NMAX)) u_regs (
    .clk, .rst_n, .we(cfg_we), .sel(cfg_sel), .wcfg(cfg_wdata),
    .wn_len(cfg_wn_len), .ws_m(cfg_ws_m), .cfg, .n_len, .s_m
  );

  control_unit #(.NMAX(NMAX), .P(P)) u_cu (
    .clk, .rst_n, .start, .cfg, .n_len, .s_m, .busy, .done,
    .tern, .op, .part, .src_ch(part_src_ch),
    .ch_raddr, .ill_raddr, .ill_we, .ill_waddr,
    .beta_raddr, .beta_we, .beta_waddr, .leaf,
    .cw_we, .leaf_idx, .frozen_ridx
  );

  channel_llr_ram #(.NMAX(NMAX), .P(P), .Q(Q)) u_ch_ram (
    .clk, .we(ch_we), .waddr(ch_waddr), .wdata(ch_wdata),
    .raddr(ch_raddr), .rdata(ch_rdata)
  );

  internal_llr_ram #(.NMAX(NMAX), .P(P), .Q(Q)) u_ill_ram (
    .clk, .we(ill_we), .waddr(ill_waddr), .wdata(ill_wdata),
    .raddr(ill_raddr), .rdata(ill_rdata_ram)
  );

  llr_bypass_reg #(.W(2*P*Q), .AW(LAW)) u_llr_byp (
    .clk, .rst_n, .we(ill_we), .waddr(ill_waddr), .wdata(ill_wdata),
    .raddr_next(ill_raddr), .ram_rdata(ill_rdata_ram), .rdata(ill_rdata), .byp_q(llr_byp_q)
  );

  // LLR source: channel at the root, internal memory (or its bypass) below
  assign llr_in = part_src_ch ? ch_rdata : ill_rdata;

  processing_unit #(.P(P), .Q(Q)) u_pu (
    .llr_in, .beta0, .beta1, .beta2, .tern, .op,
    .llr_bin_out, .llr_tern_out, .hd, .beta_bin_out, .beta_tern_out
  );

  llr_mem_interface #(.P(P), .Q(Q)) u_llr_if (
    .tern, .part, .llr_bin_out(llr_bin_out), .llr_tern_out(llr_tern_out),
    .byp_q(llr_byp_q), .wdata(ill_wdata)
  );

  beta_ram #(.NMAX(NMAX), .P(P)) u_beta_ram (
    .clk, .we(beta_we), .waddr(beta_waddr), .wdata(beta_wdata),
    .raddr(beta_raddr), .rdata(beta_rdata_ram)
  );

  beta_bypass_reg #(.W(2*P), .AW(BAW)) u_beta_byp (
    .clk, .rst_n, .we(beta_we), .waddr(beta_waddr), .wdata(beta_wdata),
    .raddr_next(beta_raddr), .ram_rdata(beta_rdata_ram), .rdata(beta_rdata)
  );

  beta_mem_interface #(.P(P)) u_beta_if (
    .rdata(beta_rdata), .tern, .part, .beta0, .beta1, .beta2,
    .leaf, .hd, .frozen, .beta_bin_out, .beta_tern_out, .wdata(beta_wdata), .u_hat
  );

  codeword_ram #(.NMAX(NMAX), .W_COD(W_COD)) u_cw_ram (
    .clk, .we(cw_we), .wbit_idx(leaf_idx), .wbit(u_hat), .raddr(cw_raddr), .rdata(cw_rdata)
  );

  frozen_ram #(.NMAX(NMAX), .W_FROZEN(W_FROZEN)) u_fz_ram (
    .clk, .we(fz_we), .waddr(fz_waddr), .wdata(fz_wdata), .rbit_idx(frozen_ridx), .frozen
  );
endmodule
