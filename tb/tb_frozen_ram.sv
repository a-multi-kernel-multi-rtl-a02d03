// tb_frozen_ram: loads a random frozen pattern in W_FROZEN=8-bit words
// (Nmax=128), then reads every bit by index in consecutive cycles, checking that
// bit i appears one cycle after index i is presented.
module tb_frozen_ram;
  localparam int NMAX = 128, W_FROZEN = 8, D = 16;
  int checks = 0, failures = 0;
  logic clk = 0, we, frozen;
  logic [3:0] waddr;
  logic [W_FROZEN-1:0] wdata;
  logic [6:0] rbit_idx;
  bit model [NMAX];
  always #5 clk = ~clk;
  frozen_ram #(.NMAX(NMAX), .W_FROZEN(W_FROZEN)) dut (.*);
  initial begin
    we = 0; waddr = '0; wdata = '0; rbit_idx = '0;
    for (int w = 0; w < D; w++) begin
      @(negedge clk);
      we = 1; waddr = 4'(w); wdata = 8'($urandom);
      for (int b = 0; b < W_FROZEN; b++) model[w * W_FROZEN + b] = wdata[b];
    end
    @(negedge clk);
    we = 0;
    for (int k = 0; k < 3 * NMAX; k++) begin
      int idx;
      idx = (k < NMAX) ? k : $urandom_range(NMAX - 1, 0);
      rbit_idx = 7'(idx);
      @(negedge clk);
      checks++;
      if (frozen != model[idx]) failures++;
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
