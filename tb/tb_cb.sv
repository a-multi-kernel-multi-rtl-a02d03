// tb_cb: exhaustive test of both combine blocks against the kernel equations:
// binary [bl^br, br]; ternary [bl^bc, bl^br, bl^bc^br] (bit k = output k).
module tb_cb;
  int checks = 0, failures = 0;
  logic b0, b1, b2, sel;
  logic [1:0] yb;
  logic [2:0] ym;
  cb_bin  u_b (.b0, .b1, .y(yb));
  cb_mixed u_m (.b0, .b1, .b2, .sel, .y(ym));
  initial begin
    for (int v = 0; v < 16; v++) begin
      {sel, b2, b1, b0} = 4'(v);
      #1;
      checks += 2;
      if (yb != {b1, b1 ^ b0}) failures++;
      if (sel ? (ym != {b0 ^ b1 ^ b2, b0 ^ b2, b0 ^ b1}) : (ym != {1'b0, b1, b0 ^ b1})) begin
        failures++;
        $display("FAIL cb_mixed v=%0d y=%b", v, ym);
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
