// tb_pe_mixed: exhaustive test of the mixed PE at Q=4 (every a, b, c, u0, u1 and
// all five operations) and a random test at Q=7, against integer arithmetic from
// polar_ref_pkg (f^b, g^b, f^t, g1^t = (1-2u0)a + f^b(b,c), g2^t).
module tb_pe_mixed;
  import polar_pkg::*;
  import polar_ref_pkg::*;
  int checks = 0, failures = 0;
  logic [3:0] a4, b4, c4, r4;
  logic [6:0] a7, b7, c7, r7;
  logic u0, u1, tern;
  pe_op_e op;
  pe_mixed #(.Q(4)) dut4 (.a(a4), .b(b4), .c(c4), .u0, .u1, .tern, .op, .res(r4));
  pe_mixed dut7 (.a(a7), .b(b7), .c(c7), .u0, .u1, .tern, .op, .res(r7));

  function automatic int expect_res(input int a, input int b, input int c, input int uu0,
                                    input int uu1, input int t, input int o, input int q);
    if (t == 0) return (o == 0) ? f2(a, b, q) : g2(a, b, uu0, q);
    case (o)
      0: return f3(a, b, c, q);
      1: return g1t(a, b, c, uu0, q);
      default: return g2t(b, c, uu0, uu1, q);
    endcase
  endfunction

  task automatic chk(input int got, input int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10)
        $display("FAIL tern=%0d op=%0d a=%0h b=%0h c=%0h u=%0d%0d: got %0h exp %0h",
                 tern, op, a4, b4, c4, u1, u0, got, exp);
    end
  endtask

  initial begin
    a7 = '0; b7 = '0; c7 = '0;
    for (int t = 0; t < 2; t++)
      for (int o = 0; o < 3; o++) begin
        if (t == 0 && o == 2) continue;
        for (int a = 0; a < 16; a++)
          for (int b = 0; b < 16; b++)
            for (int c = 0; c < 16; c++)
              for (int u = 0; u < 4; u++) begin
                a4 = 4'(a); b4 = 4'(b); c4 = 4'(c); u0 = u[0]; u1 = u[1];
                tern = t[0]; op = pe_op_e'(o);
                #1;
                chk(int'(r4), expect_res(a, b, c, u & 1, u >> 1, t, o, 4));
              end
      end
    repeat (30000) begin
      a7 = 7'($urandom); b7 = 7'($urandom); c7 = 7'($urandom);
      u0 = 1'($urandom); u1 = 1'($urandom); tern = 1'($urandom);
      op = pe_op_e'(tern ? $urandom_range(2, 0) : $urandom_range(1, 0));
      #1;
      chk(int'(r7), expect_res(int'(a7), int'(b7), int'(c7), int'(u0), int'(u1), int'(tern), int'(op), 7));
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
