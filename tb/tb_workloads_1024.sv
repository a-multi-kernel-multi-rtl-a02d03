// tb_workloads_1024: the decoder in its Nmax=1024, P=60, Q=6 configuration
// decoding the four published codes for that size (N=768, 576, 384, 324) and
// the binary N=1024 code whose throughput is quoted for this configuration
// (3140 cycles), with noiseless and noisy LLRs; checks decoded bits and
// latencies as the other end-to-end tests do.
module tb_workloads_1024;
  import polar_pkg::*;

  localparam int NMAX = 1024, P = 60, Q = 6;
  localparam int MAXD = $clog2(NMAX);
  localparam int DW = $clog2(MAXD + 2);
  localparam int NW = $clog2(NMAX) + 1;

  logic clk, rst_n, ch_we, fz_we, cfg_we, start, busy, done, finished;
  logic [3:0] ch_waddr;
  logic [2*P*Q-1:0] ch_wdata;
  logic [4:0] fz_waddr;
  logic [31:0] fz_wdata, cw_rdata;
  logic [DW-1:0] cfg_sel, cfg_ws_m;
  stage_cfg_t cfg_wdata;
  logic [NW-1:0] cfg_wn_len;
  logic [4:0] cw_raddr;
  int checks, failures;

  polar_decoder #(.NMAX(NMAX), .P(P), .Q(Q)) dut (.*);
  decoder_driver #(.NMAX(NMAX), .P(P), .Q(Q), .CODESET(2)) drv (.*);

  initial begin
    wait (finished);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end
endmodule
