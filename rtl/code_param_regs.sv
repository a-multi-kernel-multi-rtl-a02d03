// code_param_regs: the register set holding the parameters of the code being
// decoded, written by the host before decoding starts.
//   global: n_len (code length N) and s_m (number of kernels = tree depth)
//   per depth d (0 = root): tern (kernel T3 at this depth), steps
//   (ceil(N_d/2P), cycles per operation of a depth-d node), llr_off (first word
//   of the depth-d LLR vector in the Internal LLR RAM), beta_off (first word of
//   the depth-d beta vectors in the beta RAM).
// Write: we with sel = d (0..MAXD) writes stage_cfg_t wcfg into stage d; sel =
// MAXD+1 writes n_len / s_m from wglob. Reset clears everything. Which quantities
// are supplied follows the architecture's list of code parameters; the field
// widths and the write port are this design's.
module code_param_regs
  import polar_pkg::*;
#(
  parameter int NMAX = 4096,
  localparam int MAXD = $clog2(NMAX),
  localparam int NW = $clog2(NMAX) + 1,
  localparam int DW = $clog2(MAXD + 2)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             we,
  input  logic [DW-1:0]    sel,
  input  stage_cfg_t       wcfg,
  input  logic [NW-1:0]    wn_len,
  input  logic [DW-1:0]    ws_m,
  output stage_cfg_t       cfg [MAXD+1],
  output logic [NW-1:0]    n_len,
  output logic [DW-1:0]    s_m
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int d = 0; d <= MAXD; d++) cfg[d] <= '0;
      n_len <= '0;
      s_m   <= '0;
    end else if (we) begin
      if (int'(sel) == MAXD + 1) begin
        n_len <= wn_len;
        s_m   <= ws_m;
      end else if (int'(sel) <= MAXD) begin
        cfg[sel] <= wcfg;
      end
    end
  end
endmodule
