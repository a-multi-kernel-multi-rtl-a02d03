// tb_channel_llr_ram: random writes and reads of the Channel LLR RAM (Nmax=64,
// P=3, Q=4) against an array model; data must appear one cycle after the read
// address, and a read of the word being written returns the old contents.
// Also checks the depth formula against the sizes of the published memory table.
module tb_channel_llr_ram;
  import polar_pkg::*;
  localparam int NMAX = 64, P = 3, Q = 4, W = 2 * P * Q;
  localparam int D = d_llr_ch(NMAX, P);
  localparam int AW = $clog2(D);
  int checks = 0, failures = 0;
  logic clk = 0, we;
  logic [AW-1:0] waddr, raddr;
  logic [W-1:0] wdata, rdata, expq;
  logic [W-1:0] model [D];
  always #5 clk = ~clk;
  channel_llr_ram #(.NMAX(NMAX), .P(P), .Q(Q)) dut (.*);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    // published table: 30240, 6480, 1440 bits for (4096,120,7), (1024,60,6), (256,18,5)
    chk(d_llr_ch(4096, 120) * 240 * 7 == 30240, "depth 4096");
    chk(d_llr_ch(1024, 60) * 120 * 6 == 6480, "depth 1024");
    chk(d_llr_ch(256, 18) * 36 * 5 == 1440, "depth 256");
    we = 0; waddr = '0; raddr = '0; wdata = '0;
    for (int i = 0; i < D; i++) begin
      @(negedge clk);
      we = 1; waddr = AW'(i); wdata = W'({$urandom, $urandom});
      model[i] = wdata;
    end
    repeat (2000) begin
      @(negedge clk);
      we = 1'($urandom); waddr = AW'($urandom_range(D - 1, 0)); wdata = W'({$urandom, $urandom});
      raddr = ($urandom_range(3, 0) == 0) ? waddr : AW'($urandom_range(D - 1, 0));
      expq = model[raddr];
      if (we) model[waddr] = wdata;
      @(posedge clk);
      #1 chk(rdata == expq, $sformatf("read %0d", raddr));
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
