// tb_code_param_regs: writes random parameters into every stage register and the
// global register (Nmax=256, so stages 0..8 and global select 9), checks reset
// clears them and that each write lands only where selected.
module tb_code_param_regs;
  import polar_pkg::*;
  localparam int NMAX = 256, MAXD = 8, NW = 9, DW = 4;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, we;
  logic [DW-1:0] sel, ws_m, s_m;
  stage_cfg_t wcfg;
  logic [NW-1:0] wn_len, n_len;
  stage_cfg_t cfg [MAXD+1];
  stage_cfg_t model [MAXD+1];
  logic [NW-1:0] m_n;
  logic [DW-1:0] m_s;
  always #5 clk = ~clk;
  code_param_regs #(.NMAX(NMAX)) dut (.*);
  initial begin
    we = 0; sel = '0; wcfg = '0; wn_len = '0; ws_m = '0;
    repeat (2) @(negedge clk);
    for (int d = 0; d <= MAXD; d++) begin
      checks++;
      if (cfg[d] != '0) failures++;
      model[d] = '0;
    end
    rst_n = 1;
    m_n = '0; m_s = '0;
    repeat (500) begin
      @(negedge clk);
      we = 1'($urandom); sel = DW'($urandom_range(MAXD + 1, 0));
      wcfg = stage_cfg_t'({$urandom, $urandom}); wn_len = NW'($urandom); ws_m = DW'($urandom);
      if (we) begin
        if (int'(sel) == MAXD + 1) begin
          m_n = wn_len;
          m_s = ws_m;
        end else model[sel] = wcfg;
      end
      @(posedge clk);
      #1;
      for (int d = 0; d <= MAXD; d++) begin
        checks++;
        if (cfg[d] != model[d]) failures++;
      end
      checks += 2;
      if (n_len != m_n) failures++;
      if (s_m != m_s) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end
endmodule
