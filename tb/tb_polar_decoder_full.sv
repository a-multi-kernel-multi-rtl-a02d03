// tb_polar_decoder_full: the decoder at its default size (Nmax=4096, P=120,
// Q=7) decoding the four published Nmax=4096 codes (N=3888, 2916, 1728, 1536)
// and the purely binary N=4096 code, each with noiseless and noisy LLRs. Checks every decoded bit against the
// reference SC decoder, the noiseless ones also against the transmitted bits,
// and each latency against the formula and the published value.
module tb_polar_decoder_full;
  import polar_pkg::*;

  localparam int NMAX = 4096, P = 120, Q = 7;
  localparam int MAXD = $clog2(NMAX);
  localparam int DW = $clog2(MAXD + 2);
  localparam int NW = $clog2(NMAX) + 1;

  logic clk, rst_n, ch_we, fz_we, cfg_we, start, busy, done, finished;
  logic [4:0] ch_waddr;
  logic [2*P*Q-1:0] ch_wdata;
  logic [6:0] fz_waddr;
  logic [31:0] fz_wdata, cw_rdata;
  logic [DW-1:0] cfg_sel, cfg_ws_m;
  stage_cfg_t cfg_wdata;
  logic [NW-1:0] cfg_wn_len;
  logic [6:0] cw_raddr;
  int checks, failures;

  polar_decoder dut (.*);
  decoder_driver #(.NMAX(NMAX), .P(P), .Q(Q), .CODESET(1)) drv (.*);

  initial begin
    wait (finished);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end
endmodule
