// tb_beta_ram: random single-bank writes and common-address reads of the three
// beta banks (Nmax=64, P=3) against array models, with one-cycle read latency;
// checks that a write reaches only the selected bank, and the depth formula
// against the published memory table (31680, 9000, 2052 bits for three banks).
module tb_beta_ram;
  import polar_pkg::*;
  localparam int NMAX = 64, P = 3, W = 2 * P;
  localparam int D = d_beta_int(NMAX, P);
  localparam int AW = $clog2(D);
  int checks = 0, failures = 0;
  logic clk = 0;
  logic [2:0] we;
  logic [AW-1:0] waddr, raddr;
  logic [W-1:0] wdata;
  logic [2:0][W-1:0] rdata, expq;
  logic [W-1:0] model [3][D];
  always #5 clk = ~clk;
  beta_ram #(.NMAX(NMAX), .P(P)) dut (.*);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    chk(d_beta_int(4096, 120) * 3 * 240 == 31680, "depth 4096");
    chk(d_beta_int(1024, 60) * 3 * 120 == 9000, "depth 1024");
    chk(d_beta_int(256, 18) * 3 * 36 == 2052, "depth 256");
    we = 0; waddr = '0; raddr = '0; wdata = '0;
    for (int b = 0; b < 3; b++)
      for (int i = 0; i < D; i++) begin
        @(negedge clk);
        we = 3'b001 << b; waddr = AW'(i); wdata = W'($urandom);
        model[b][i] = wdata;
      end
    repeat (3000) begin
      @(negedge clk);
      we = ($urandom_range(1, 0) == 0) ? 3'b000 : (3'b001 << $urandom_range(2, 0));
      waddr = AW'($urandom_range(D - 1, 0)); wdata = W'($urandom);
      raddr = ($urandom_range(3, 0) == 0) ? waddr : AW'($urandom_range(D - 1, 0));
      for (int b = 0; b < 3; b++) expq[b] = model[b][raddr];
      for (int b = 0; b < 3; b++) if (we[b]) model[b][waddr] = wdata;
      @(posedge clk);
      #1 for (int b = 0; b < 3; b++) chk(rdata[b] == expq[b], $sformatf("bank %0d addr %0d", b, raddr));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end
endmodule
