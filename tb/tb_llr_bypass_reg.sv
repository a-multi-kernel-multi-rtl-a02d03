// tb_llr_bypass_reg: the bypass register in front of a registered-read RAM model
// (the RAM model lives in this testbench). Random writes and reads, many of them
// to the address written in the same cycle; the corrected read data must always
// equal the memory contents including the previous cycle's write, and byp_q
// must be the last word written.
module tb_llr_bypass_reg;
  localparam int W = 20, AW = 3, D = 8;
  int checks = 0, failures = 0, hits = 0;
  logic clk = 0, rst_n = 0, we;
  logic [AW-1:0] waddr, raddr_next;
  logic [W-1:0] wdata, ram_rdata, rdata, byp_q, last_w;
  logic [W-1:0] mem [D];
  logic [W-1:0] model [D];
  always #5 clk = ~clk;
  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    ram_rdata <= mem[raddr_next];
  end
  llr_bypass_reg #(.W(W), .AW(AW)) dut (.*);
  initial begin
    we = 0; waddr = '0; raddr_next = '0; wdata = '0;
    last_w = '0;
    for (int i = 0; i < D; i++) begin
      mem[i] = W'(i);
      model[i] = W'(i);
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    repeat (3000) begin
      logic [AW-1:0] ra;
      @(negedge clk);
      we = 1'($urandom); waddr = AW'($urandom); wdata = W'($urandom);
      ra = ($urandom_range(1, 0) == 0) ? waddr : AW'($urandom);
      raddr_next = ra;
      if (we) begin
        model[waddr] = wdata;
        last_w = wdata;
        if (waddr == ra) hits++;
      end
      @(posedge clk);
      #1;
      checks += 2;
      if (rdata != model[ra]) failures++;
      if (byp_q != last_w) failures++;
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
