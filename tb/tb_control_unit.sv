// tb_control_unit: runs the control unit alone (Nmax=256, P=6, so that most
// stages take several steps) over a set of binary, ternary and mixed kernel
// sequences and counts what it drives. Per code it checks: busy lasts exactly
// the latency formula; leaves are written N times with indices 0..N-1 in order
// and frozen_ridx one ahead; done pulses once, right after busy falls; the number
// of LLR-write, comb and leaf cycles equals the tree's operation count; g2 only
// appears on ternary stages; every address stays inside its region. Besides a
// few mixed orders it runs every supported length 2^a 3^b <= Nmax (27 of them),
// each with binary kernels first and, when mixed, ternary first, and checks that
// the regions of each fit the memory depths.
module tb_control_unit;
  import polar_pkg::*;
  import polar_ref_pkg::*;
  localparam int NMAX = 256, P = 6;
  localparam int MAXD = $clog2(NMAX), DW = $clog2(MAXD + 2), NW = $clog2(NMAX) + 1, IW = $clog2(NMAX);
  localparam int D_CH = d_llr_ch(NMAX, P), D_LI = d_llr_int(NMAX, P), D_BI = d_beta_int(NMAX, P);
  localparam int CAW = $clog2(D_CH), LAW = $clog2(D_LI), BAW = $clog2(D_BI);

  int checks = 0, failures = 0, n_codes = 0;
  logic clk = 0, rst_n = 0, start = 0;
  stage_cfg_t cfg [MAXD+1];
  logic [NW-1:0] n_len;
  logic [DW-1:0] s_m;
  logic busy, done, tern, src_ch, ill_we, leaf, cw_we;
  pe_op_e op;
  logic [1:0] part;
  logic [CAW-1:0] ch_raddr;
  logic [LAW-1:0] ill_raddr, ill_waddr;
  logic [BAW-1:0] beta_raddr, beta_waddr;
  logic [2:0] beta_we;
  logic [IW-1:0] leaf_idx, frozen_ridx;
  always #5 clk = ~clk;
  control_unit #(.NMAX(NMAX), .P(P)) dut (.*);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  task automatic run(input int ker[$]);
    stage_cfg_t c[RMAX_D];
    int len[RMAX_D];
    int lw, bw, n, l_exp, ill_exp, comb_exp;
    int cyc, leaves, ill_w, combs, dones, g2_bad, addr_bad, ridx_bad;
    make_cfg(ker, P, c, lw, bw);
    lens(ker, len);
    n = len[0];
    l_exp = latency(ker, P);
    ill_exp = 0;
    comb_exp = 0;
    foreach (ker[d]) begin
      if (d < ker.size() - 1) ill_exp += int'(c[d].steps) * ker[d] * (n / len[d]);
      if (d > 0) comb_exp += int'(c[d].steps) * (n / len[d] - 1);
    end
    for (int d = 0; d <= MAXD; d++) cfg[d] = c[d];
    n_len = NW'(n);
    s_m = DW'(ker.size());
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    {cyc, leaves, ill_w, combs, dones, g2_bad, addr_bad, ridx_bad} = '0;
    while (busy) begin
      cyc++;
      if (leaf) begin
        if (leaf_idx != IW'(leaves)) ridx_bad++;
        leaves++;
        if (leaves < n && frozen_ridx != IW'(leaves)) ridx_bad++;
        if (!cw_we || $countones(beta_we) != 1) addr_bad++;
      end
      if (ill_we) begin
        ill_w++;
        if (int'(ill_waddr) >= lw) addr_bad++;
      end
      if (|beta_we && !leaf) combs++;
      if (|beta_we && int'(beta_waddr) >= bw) addr_bad++;
      if (op == OP_G2 && !tern) g2_bad++;
      if (src_ch && int'(ch_raddr) >= D_CH) addr_bad++;
      if (done) dones++;
      @(negedge clk);
      if (cyc > 100000) break;
    end
    if (done) dones++;
    @(negedge clk);
    if (done) dones++;
    chk(cyc == l_exp, $sformatf("N=%0d busy %0d cycles, expected %0d", n, cyc, l_exp));
    chk(leaves == n, $sformatf("N=%0d leaves %0d", n, leaves));
    chk(ridx_bad == 0, $sformatf("N=%0d leaf/frozen index errors %0d", n, ridx_bad));
    chk(ill_w == ill_exp, $sformatf("N=%0d LLR writes %0d, expected %0d", n, ill_w, ill_exp));
    chk(combs == comb_exp, $sformatf("N=%0d comb cycles %0d, expected %0d", n, combs, comb_exp));
    chk(dones == 1, $sformatf("N=%0d done pulses %0d", n, dones));
    chk(g2_bad == 0, $sformatf("N=%0d g2 on binary stage", n));
    chk(addr_bad == 0, $sformatf("N=%0d address errors %0d", n, addr_bad));
    chk(lw <= D_LI && bw <= D_BI && c[0].steps <= D_CH,
        $sformatf("N=%0d needs %0d/%0d words, memories hold %0d/%0d", n, lw, bw, D_LI, D_BI));
    n_codes++;
  endtask

  initial begin
    for (int d = 0; d <= MAXD; d++) cfg[d] = '0;
    n_len = '0;
    s_m = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    run('{2});
    run('{3});
    run('{2, 2, 2, 2, 2, 2, 2, 2});
    run('{3, 3, 3, 3, 3});
    run('{3, 2, 2, 2, 2, 2, 2});
    run('{2, 2, 2, 3, 2, 2});
    run('{2, 3, 2, 3, 2});
    run('{3, 3, 2, 3});
    // every length 2^a 3^b up to Nmax, binary kernels first and ternary first
    for (int a = 0; a <= MAXD; a++)
      for (int b = 0; b <= 5; b++) begin
        int ker_bt[$], ker_tb[$], len;
        len = (1 << a) * (3 ** b);
        if (len < 2 || len > NMAX) continue;
        ker_bt = {};
        ker_tb = {};
        for (int k = 0; k < a; k++) ker_bt.push_back(2);
        for (int k = 0; k < b; k++) ker_bt.push_back(3);
        for (int k = 0; k < b; k++) ker_tb.push_back(3);
        for (int k = 0; k < a; k++) ker_tb.push_back(2);
        run(ker_bt);
        if (a > 0 && b > 0) run(ker_tb);
      end
    // 27 supported lengths for Nmax = 256
    chk(n_codes == 8 + 27 + 14, $sformatf("%0d codes run", n_codes));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #10000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end
endmodule
