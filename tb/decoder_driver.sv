// decoder_driver: stimulus and checking for polar_decoder testbenches.
//
// Generates the clock and reset, then for each code of the selected set: builds
// the code parameters, draws a frozen pattern and an information vector, encodes
// it, turns the codeword into channel LLRs (noiseless, then with random noise),
// loads the decoder, decodes, and compares the decoded bits with the reference
// SC decoder of polar_ref_pkg (and, when noiseless, with the transmitted bits).
// It also checks the number of busy cycles against the latency formula and, where
// given, against the published latency of that code.
// CODESET 0: small codes (Nmax=256, P=18, Q=5 set); 1: the Nmax=4096 codes;
// 2: the Nmax=1024 codes; 3: one Nmax=4096 code (N=3888).
module decoder_driver
  import polar_pkg::*;
  import polar_ref_pkg::*;
#(
  parameter int NMAX = 256,
  parameter int P = 18,
  parameter int Q = 5,
  parameter int W_COD = 32,
  parameter int W_FROZEN = 32,
  parameter int CODESET = 0,
  localparam int MAXD = $clog2(NMAX),
  localparam int DW   = $clog2(MAXD + 2),
  localparam int NW   = $clog2(NMAX) + 1,
  localparam int D_CH = d_llr_ch(NMAX, P),
  localparam int D_CW = ceil_div(NMAX, W_COD),
  localparam int D_FZ = ceil_div(NMAX, W_FROZEN),
  localparam int CAW  = (D_CH > 1) ? $clog2(D_CH) : 1,
  localparam int CWAW = (D_CW > 1) ? $clog2(D_CW) : 1,
  localparam int FZAW = (D_FZ > 1) ? $clog2(D_FZ) : 1
) (
  output logic                clk,
  output logic                rst_n,
  output logic                ch_we,
  output logic [CAW-1:0]      ch_waddr,
  output logic [2*P*Q-1:0]    ch_wdata,
  output logic                fz_we,
  output logic [FZAW-1:0]     fz_waddr,
  output logic [W_FROZEN-1:0] fz_wdata,
  output logic                cfg_we,
  output logic [DW-1:0]       cfg_sel,
  output stage_cfg_t          cfg_wdata,
  output logic [NW-1:0]       cfg_wn_len,
  output logic [DW-1:0]       cfg_ws_m,
  output logic                start,
  input  logic                busy,
  input  logic                done,
  output logic [CWAW-1:0]     cw_raddr,
  input  logic [W_COD-1:0]    cw_rdata,
  output int                  checks,
  output int                  failures,
  output logic                finished
);
  initial clk = 1'b0;
  always #5 clk = ~clk;

  int busy_cycles;
  always @(posedge clk) if (busy) busy_cycles++;

  typedef struct {
    int ker[$];
    int paper_l;   // published latency, 0 if none
  } code_t;
  code_t codes[$];

  function automatic code_t mkcode(input int k[$], input int pl);
    code_t c;
    c.ker = k;
    c.paper_l = pl;
    return c;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic run_code(input code_t c, input int noise);
    stage_cfg_t cfg[RMAX_D];
    int  lw, bw, n, sm, l_exp;
    bit  u[RMAX_N];
    bit  frz[RMAX_N];
    bit  x[RMAX_N];
    bit  uref[RMAX_N];
    int  y[RMAX_N];
    int  amp, m, s, errs;
    logic [W_COD-1:0] w;
    n  = code_len(c.ker);
    sm = c.ker.size();
    make_cfg(c.ker, P, cfg, lw, bw);
    check(lw <= d_llr_int(NMAX, P) && bw <= d_beta_int(NMAX, P) && n <= NMAX, "code fits memories");
    l_exp = latency(c.ker, P);
    for (int i = 0; i < RMAX_N; i++) begin
      frz[i] = (i < n) ? bit'($urandom_range(1, 0)) : 1'b1;
      u[i]   = frz[i] ? 1'b0 : bit'($urandom_range(1, 0));
    end
    encode(c.ker, u, x);
    amp = (1 << (Q - 1)) / 3 + 1;
    for (int i = 0; i < RMAX_N; i++) begin
      if (i >= n) begin
        y[i] = 0;
        continue;
      end
      m = noise ? amp + $urandom_range(2 * amp, 0) - amp - amp / 2 : amp;
      s = x[i];
      if (m < 0) begin
        m = -m;
        s = 1 - s;
      end
      if (m > (1 << (Q - 1)) - 1) m = (1 << (Q - 1)) - 1;
      y[i] = mk(s, m, Q);
    end
    sc_decode(c.ker, y, frz, Q, uref);

    // load the code parameters, frozen pattern and channel LLRs
    @(negedge clk);
    for (int d = 0; d <= MAXD; d++) begin
      cfg_we = 1'b1;
      cfg_sel = DW'(d);
      cfg_wdata = (d < RMAX_D) ? cfg[d] : '0;
      @(negedge clk);
    end
    cfg_sel = DW'(MAXD + 1);
    cfg_wn_len = NW'(n);
    cfg_ws_m = DW'(sm);
    @(negedge clk);
    cfg_we = 1'b0;
    for (int wd = 0; wd < D_FZ; wd++) begin
      fz_we = 1'b1;
      fz_waddr = FZAW'(wd);
      for (int b = 0; b < W_FROZEN; b++) fz_wdata[b] = frz[wd * W_FROZEN + b];
      @(negedge clk);
    end
    fz_we = 1'b0;
    for (int wd = 0; wd < ceil_div(n, 2 * P); wd++) begin
      ch_we = 1'b1;
      ch_waddr = CAW'(wd);
      for (int k = 0; k < 2 * P; k++)
        ch_wdata[k*Q +: Q] = Q'(((wd * 2 * P + k) < n) ? y[wd * 2 * P + k] : 0);
      @(negedge clk);
    end
    ch_we = 1'b0;

    // decode
    busy_cycles = 0;
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    while (!done) @(negedge clk);
    @(negedge clk);
    check(busy_cycles == l_exp, $sformatf("latency %0d, expected %0d (N=%0d)", busy_cycles, l_exp, n));
    if (c.paper_l != 0)
      check(busy_cycles == c.paper_l, $sformatf("latency %0d, published %0d (N=%0d)", busy_cycles, c.paper_l, n));

    // read back and compare
    errs = 0;
    for (int wd = 0; wd < ceil_div(n, W_COD); wd++) begin
      cw_raddr = CWAW'(wd);
      @(negedge clk);
      w = cw_rdata;
      for (int b = 0; b < W_COD; b++) begin
        int i = wd * W_COD + b;
        if (i < n) begin
          if (w[b] != uref[i]) errs++;
          if (!noise && w[b] != u[i]) errs++;
        end
      end
    end
    check(errs == 0, $sformatf("decoded bits, %0d mismatches (N=%0d noise=%0d)", errs, n, noise));
    $display("code N=%0d stages=%0d noise=%0d latency=%0d", n, sm, noise, busy_cycles);
  endtask

  initial begin
    checks = 0;
    failures = 0;
    finished = 1'b0;
    rst_n = 1'b0;
    {ch_we, fz_we, cfg_we, start} = '0;
    ch_waddr = '0; ch_wdata = '0; fz_waddr = '0; fz_wdata = '0;
    cfg_sel = '0; cfg_wdata = '0; cfg_wn_len = '0; cfg_ws_m = '0; cw_raddr = '0;
    case (CODESET)
      0: begin
        codes.push_back(mkcode('{3, 3, 3, 3, 3}, 519));
        codes.push_back(mkcode('{3, 2, 2, 2, 2, 2, 2}, 587));
        codes.push_back(mkcode('{2, 2, 2, 3, 2, 2}, 272));
        codes.push_back(mkcode('{3, 3, 3, 3}, 162));
        codes.push_back(mkcode('{3, 2, 2, 2, 2}, 137));
        codes.push_back(mkcode('{2, 2, 2, 2, 2, 2, 2, 2}, 0));
        codes.push_back(mkcode('{2}, 0));
        codes.push_back(mkcode('{3}, 0));
        codes.push_back(mkcode('{2, 3}, 0));
        codes.push_back(mkcode('{3, 2, 3, 2, 2}, 0));
      end
      1: begin
        codes.push_back(mkcode('{2, 3, 2, 2, 2, 3, 3, 3, 3}, 7965));
        codes.push_back(mkcode('{2, 3, 3, 2, 3, 3, 3, 3}, 5953));
        codes.push_back(mkcode('{2, 2, 2, 2, 2, 2, 3, 3, 3}, 3548));
        // Published latency 4663 for this code disagrees with the latency formula
        // (4644); only the formula is checked.
        codes.push_back(mkcode('{3, 2, 2, 2, 2, 2, 2, 2, 2, 2}, 0));
        // purely binary code of the maximum length
        codes.push_back(mkcode('{2, 2, 2, 2, 2, 2, 2, 2, 2, 2, 2, 2}, 0));
      end
      2: begin
        codes.push_back(mkcode('{2, 2, 3, 2, 2, 2, 2, 2, 2}, 2326));
        codes.push_back(mkcode('{2, 2, 2, 2, 2, 2, 3, 3}, 1234));
        codes.push_back(mkcode('{3, 2, 2, 2, 2, 2, 2, 2}, 1156));
        codes.push_back(mkcode('{2, 2, 3, 3, 3, 3}, 652));
        // N=1024 binary code of the comparison with binary decoders: 0.33 bit per
        // cycle and 361.98 Mb/s at 1.11 GHz give 1024 * 1.11e9 / 361.98e6 = 3140
        codes.push_back(mkcode('{2, 2, 2, 2, 2, 2, 2, 2, 2, 2}, 3140));
      end
      default: codes.push_back(mkcode('{2, 3, 2, 2, 2, 3, 3, 3, 3}, 7965));
    endcase
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    foreach (codes[i]) begin
      run_code(codes[i], 0);
      run_code(codes[i], 1);
    end
    finished = 1'b1;
  end
endmodule
