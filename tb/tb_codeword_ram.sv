// tb_codeword_ram: writes N=100 bits one at a time (as the decoder does, Nmax=128,
// W_COD=8), overwrites some, then reads every word back through the registered
// host port and compares with a bit-array model.
module tb_codeword_ram;
  localparam int NMAX = 128, W_COD = 8, D = 16;
  int checks = 0, failures = 0;
  logic clk = 0, we, wbit;
  logic [6:0] wbit_idx;
  logic [3:0] raddr;
  logic [W_COD-1:0] rdata;
  bit model [NMAX];
  always #5 clk = ~clk;
  codeword_ram #(.NMAX(NMAX), .W_COD(W_COD)) dut (.*);
  initial begin
    we = 0; wbit = 0; wbit_idx = '0; raddr = '0;
    for (int i = 0; i < NMAX; i++) begin
      @(negedge clk);
      we = 1; wbit_idx = 7'(i); wbit = 1'($urandom); model[i] = wbit;
    end
    repeat (200) begin
      @(negedge clk);
      we = 1; wbit_idx = 7'($urandom); wbit = 1'($urandom); model[wbit_idx] = wbit;
    end
    @(negedge clk);
    we = 0;
    for (int w = 0; w < D; w++) begin
      raddr = 4'(w);
      @(negedge clk);
      for (int b = 0; b < W_COD; b++) begin
        checks++;
        if (rdata[b] != model[w * W_COD + b]) failures++;
      end
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
