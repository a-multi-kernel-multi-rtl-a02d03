// tb_polar_decoder: end-to-end test of the decoder in its Nmax=256, P=18, Q=5
// configuration. Decodes ten codes (pure binary, pure ternary, mixed, the
// shortest N=2 and N=3) with noiseless and noisy channel LLRs, compares every
// decoded bit with the reference SC decoder and every latency with the formula
// and the published figures. It also counts how often each datapath mechanism is
// used (ternary and binary operations of every kind, multi-step operations,
// partial-word LLR writes, both bypass registers, frozen and information leaves,
// channel and internal LLR sources, saturated sums) and fails if one never occurs.
module tb_polar_decoder;
  import polar_pkg::*;

  localparam int NMAX = 256, P = 18, Q = 5;
  localparam int MAXD = $clog2(NMAX);
  localparam int DW = $clog2(MAXD + 2);
  localparam int NW = $clog2(NMAX) + 1;

  logic clk, rst_n, ch_we, fz_we, cfg_we, start, busy, done, finished;
  logic [2:0] ch_waddr;
  logic [2*P*Q-1:0] ch_wdata;
  logic [2:0] fz_waddr;
  logic [31:0] fz_wdata, cw_rdata;
  logic [DW-1:0] cfg_sel, cfg_ws_m;
  stage_cfg_t cfg_wdata;
  logic [NW-1:0] cfg_wn_len;
  logic [2:0] cw_raddr;
  int checks, failures;

  polar_decoder #(.NMAX(NMAX), .P(P), .Q(Q)) dut (.*);
  decoder_driver #(.NMAX(NMAX), .P(P), .Q(Q), .CODESET(0)) drv (.*);

  // mechanism counters
  typedef enum int {M_BIN_F, M_BIN_G, M_TERN_F, M_TERN_G1, M_TERN_G2, M_COMB_B, M_COMB_T,
                    M_MULTISTEP, M_PART_MERGE, M_LLR_BYP, M_BETA_BYP, M_FROZEN, M_INFO,
                    M_SRC_CH, M_SRC_INT, M_SAT, M_NUM} mech_e;
  int cnt[M_NUM];
  always @(posedge clk) if (rst_n && dut.busy) begin
    if (!dut.u_cu.comb_q && !dut.tern && dut.op == OP_F) cnt[M_BIN_F]++;
    if (!dut.u_cu.comb_q && !dut.tern && dut.op == OP_G) cnt[M_BIN_G]++;
    if (!dut.u_cu.comb_q && dut.tern && dut.op == OP_F) cnt[M_TERN_F]++;
    if (!dut.u_cu.comb_q && dut.tern && dut.op == OP_G) cnt[M_TERN_G1]++;
    if (!dut.u_cu.comb_q && dut.tern && dut.op == OP_G2) cnt[M_TERN_G2]++;
    if (dut.u_cu.comb_q && !dut.tern) cnt[M_COMB_B]++;
    if (dut.u_cu.comb_q && dut.tern) cnt[M_COMB_T]++;
    if (dut.u_cu.j_q != 0) cnt[M_MULTISTEP]++;
    if (dut.ill_we && dut.part != 0) cnt[M_PART_MERGE]++;
    if (!dut.part_src_ch && dut.u_llr_byp.hit_q) cnt[M_LLR_BYP]++;
    if (|dut.u_beta_byp.hit_q) cnt[M_BETA_BYP]++;
    if (dut.leaf && dut.frozen) cnt[M_FROZEN]++;
    if (dut.leaf && !dut.frozen) cnt[M_INFO]++;
    if (dut.part_src_ch) cnt[M_SRC_CH]++;
    else cnt[M_SRC_INT]++;
    for (int i = 0; i < P; i++)
      if (dut.op != OP_F && dut.llr_bin_out[i][Q-2:0] == '1) cnt[M_SAT]++;
  end

  int nfail;
  initial begin
    wait (finished);
    nfail = failures;
    for (int m = 0; m < M_NUM; m++) begin
      $display("mechanism %s: %0d", mech_e'(m), cnt[m]);
      if (cnt[m] == 0) nfail++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks + M_NUM, nfail);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end
endmodule
