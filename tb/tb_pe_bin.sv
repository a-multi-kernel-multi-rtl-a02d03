// tb_pe_bin: exhaustive test of the binary PE at Q=5 (every a, b, u0, f/g) and
// a random test at the default Q=7, against integer arithmetic from
// polar_ref_pkg (min-sum f, saturated (1-2u0)a + b for g).
module tb_pe_bin;
  import polar_ref_pkg::*;
  int checks = 0, failures = 0;
  logic [4:0] a5, b5, r5;
  logic [6:0] a7, b7, r7;
  logic u0, sel_g;
  pe_bin #(.Q(5)) dut5 (.a(a5), .b(b5), .u0(u0), .sel_g(sel_g), .res(r5));
  pe_bin dut7 (.a(a7), .b(b7), .u0(u0), .sel_g(sel_g), .res(r7));

  task automatic chk(input int got, input int exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0h exp %0h", what, got, exp);
    end
  endtask

  initial begin
    for (int a = 0; a < 32; a++)
      for (int b = 0; b < 32; b++)
        for (int u = 0; u < 2; u++)
          for (int s = 0; s < 2; s++) begin
            a5 = 5'(a); b5 = 5'(b); u0 = u[0]; sel_g = s[0];
            a7 = '0; b7 = '0;
            #1;
            chk(int'(r5), (s != 0) ? g2(a, b, u, 5) : f2(a, b, 5), $sformatf("Q5 a=%0h b=%0h u=%0d g=%0d", a, b, u, s));
          end
    repeat (20000) begin
      a7 = 7'($urandom); b7 = 7'($urandom); u0 = 1'($urandom); sel_g = 1'($urandom);
      #1;
      chk(int'(r7), sel_g ? g2(int'(a7), int'(b7), int'(u0), 7) : f2(int'(a7), int'(b7), 7), "Q7 random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #10000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end
endmodule
