// tb_beta_mem_interface: random test (P=6) of the read slicing (P bits per bank
// for binary steps 0..1, 2P/3 bits zero-extended for ternary steps 0..2) and of
// the write selection (combine results or the leaf decision hd AND NOT frozen).
module tb_beta_mem_interface;
  localparam int P = 6, PBT = 4, W = 12;
  int checks = 0, failures = 0;
  logic [2:0][W-1:0] rdata;
  logic tern, leaf, hd, frozen, u_hat;
  logic [1:0] part;
  logic [P-1:0] beta0, beta1;
  logic [PBT-1:0] beta2;
  logic [W-1:0] beta_bin_out, beta_tern_out, wdata;
  beta_mem_interface #(.P(P)) dut (.*);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (2000) begin
      for (int b = 0; b < 3; b++) rdata[b] = W'($urandom);
      tern = 1'($urandom);
      part = 2'(tern ? $urandom_range(2, 0) : $urandom_range(1, 0));
      leaf = 1'($urandom); hd = 1'($urandom); frozen = 1'($urandom);
      beta_bin_out = W'($urandom); beta_tern_out = W'($urandom);
      #1;
      for (int i = 0; i < P; i++) begin
        bit e0, e1;
        if (tern) begin
          e0 = (i < PBT) ? rdata[0][part * PBT + i] : 1'b0;
          e1 = (i < PBT) ? rdata[1][part * PBT + i] : 1'b0;
        end else begin
          e0 = rdata[0][part * P + i];
          e1 = rdata[1][part * P + i];
        end
        chk(beta0[i] == e0, "beta0");
        chk(beta1[i] == e1, "beta1");
      end
      for (int i = 0; i < PBT; i++) chk(beta2[i] == rdata[2][part * PBT + i], "beta2");
      chk(u_hat == (hd && !frozen), "u_hat");
      if (leaf) chk(wdata == W'(hd && !frozen), "leaf wdata");
      else chk(wdata == (tern ? beta_tern_out : beta_bin_out), "comb wdata");
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
