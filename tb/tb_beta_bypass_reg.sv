// tb_beta_bypass_reg: the beta bypass register in front of a three-bank
// registered-read RAM model (in this testbench). Random single-bank writes and
// common-address reads; each bank's corrected read must equal its contents
// including the previous cycle's write, and a write to one bank must not
// disturb what the other banks return.
module tb_beta_bypass_reg;
  localparam int W = 12, AW = 3, D = 8;
  int checks = 0, failures = 0, hits = 0;
  logic clk = 0, rst_n = 0;
  logic [2:0] we;
  logic [AW-1:0] waddr, raddr_next;
  logic [W-1:0] wdata;
  logic [2:0][W-1:0] ram_rdata, rdata;
  logic [W-1:0] mem [3][D];
  logic [W-1:0] model [3][D];
  always #5 clk = ~clk;
  always_ff @(posedge clk)
    for (int b = 0; b < 3; b++) begin
      if (we[b]) mem[b][waddr] <= wdata;
      ram_rdata[b] <= mem[b][raddr_next];
    end
  beta_bypass_reg #(.W(W), .AW(AW)) dut (.*);
  initial begin
    we = 0; waddr = '0; raddr_next = '0; wdata = '0;
    for (int b = 0; b < 3; b++)
      for (int i = 0; i < D; i++) begin
        mem[b][i] = W'(16 * b + i);
        model[b][i] = W'(16 * b + i);
      end
    repeat (2) @(negedge clk);
    rst_n = 1;
    repeat (3000) begin
      logic [AW-1:0] ra;
      @(negedge clk);
      we = ($urandom_range(3, 0) == 0) ? 3'b000 : (3'b001 << $urandom_range(2, 0));
      waddr = AW'($urandom); wdata = W'($urandom);
      ra = ($urandom_range(1, 0) == 0) ? waddr : AW'($urandom);
      raddr_next = ra;
      for (int b = 0; b < 3; b++) if (we[b]) model[b][waddr] = wdata;
      if (|we && waddr == ra) hits++;
      @(posedge clk);
      #1;
      for (int b = 0; b < 3; b++) begin
        checks++;
        if (rdata[b] != model[b][ra]) failures++;
      end
    end
    checks++;
    if (hits == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end
endmodule
