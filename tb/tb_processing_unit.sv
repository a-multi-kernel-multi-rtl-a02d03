// tb_processing_unit: random test of the processing unit with P=6 (4 mixed and
// 2 binary PEs), Q=5. Expected outputs are computed with polar_ref_pkg from the
// routing rules: binary PE i uses LLRs 2i, 2i+1, ternary PE i uses 3i..3i+2,
// PE/CB i uses beta0[i], beta1[i] (and beta2[i]); HD is the sign of output 0.
module tb_processing_unit;
  import polar_pkg::*;
  import polar_ref_pkg::*;
  localparam int P = 6, Q = 5, PBT = 4;
  int checks = 0, failures = 0;
  logic [2*P-1:0][Q-1:0] llr_in;
  logic [P-1:0] beta0, beta1;
  logic [PBT-1:0] beta2;
  logic tern, hd;
  pe_op_e op;
  logic [P-1:0][Q-1:0] llr_bin_out;
  logic [PBT-1:0][Q-1:0] llr_tern_out;
  logic [2*P-1:0] beta_bin_out, beta_tern_out;
  processing_unit #(.P(P), .Q(Q)) dut (.*);

  task automatic chk(input int got, input int exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s got %0h exp %0h", what, got, exp);
    end
  endtask

  initial begin
    repeat (3000) begin
      for (int k = 0; k < 2 * P; k++) llr_in[k] = Q'($urandom);
      beta0 = P'($urandom); beta1 = P'($urandom); beta2 = PBT'($urandom);
      tern = 1'($urandom);
      op = pe_op_e'(tern ? $urandom_range(2, 0) : $urandom_range(1, 0));
      #1;
      if (!tern) begin
        for (int i = 0; i < P; i++) begin
          chk(int'(llr_bin_out[i]), (op == OP_F) ? f2(int'(llr_in[2*i]), int'(llr_in[2*i+1]), Q)
              : g2(int'(llr_in[2*i]), int'(llr_in[2*i+1]), int'(beta0[i]), Q), $sformatf("bin PE %0d", i));
          chk(int'(beta_bin_out[2*i]), int'(1'(beta0[i] ^ beta1[i])), "comb^b 0");
          chk(int'(beta_bin_out[2*i+1]), int'(beta1[i]), "comb^b 1");
        end
      end else begin
        for (int i = 0; i < PBT; i++) begin
          int a, b, c, e;
          a = int'(llr_in[3*i]); b = int'(llr_in[3*i+1]); c = int'(llr_in[3*i+2]);
          case (op)
            OP_F: e = f3(a, b, c, Q);
            OP_G: e = g1t(a, b, c, int'(beta0[i]), Q);
            default: e = g2t(b, c, int'(beta0[i]), int'(beta1[i]), Q);
          endcase
          chk(int'(llr_tern_out[i]), e, $sformatf("tern PE %0d op %0d", i, op));
          chk(int'(beta_tern_out[3*i]), int'(1'(beta0[i] ^ beta1[i])), "comb^t 0");
          chk(int'(beta_tern_out[3*i+1]), int'(1'(beta0[i] ^ beta2[i])), "comb^t 1");
          chk(int'(beta_tern_out[3*i+2]), int'(1'(beta0[i] ^ beta1[i] ^ beta2[i])), "comb^t 2");
        end
      end
      chk(int'(hd), int'(llr_bin_out[0][Q-1]), "hd");
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
