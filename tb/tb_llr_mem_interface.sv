// tb_llr_mem_interface: builds words the way the decoder does (P=6, Q=4): for
// binary and ternary stages, a sequence of steps whose write words are fed back
// as the bypass value; after two (binary) or three (ternary) steps the word must
// hold all results in order, and after the first step the unused part must be
// zero.
module tb_llr_mem_interface;
  localparam int P = 6, Q = 4, PBT = 4, W = 2 * P * Q;
  int checks = 0, failures = 0;
  logic tern;
  logic [1:0] part;
  logic [P*Q-1:0] llr_bin_out;
  logic [PBT*Q-1:0] llr_tern_out;
  logic [W-1:0] byp_q, wdata, expw;
  llr_mem_interface #(.P(P), .Q(Q)) dut (.*);
  initial begin
    repeat (500) begin
      tern = 1'($urandom);
      byp_q = W'({$urandom, $urandom});    // stale content before the first step
      expw = '0;
      for (int k = 0; k < (tern ? 3 : 2); k++) begin
        part = 2'(k);
        llr_bin_out = (P*Q)'({$urandom, $urandom});
        llr_tern_out = (PBT*Q)'($urandom);
        if (tern) expw[k*PBT*Q +: PBT*Q] = llr_tern_out;
        else      expw[k*P*Q +: P*Q] = llr_bin_out;
        #1;
        checks++;
        if (wdata != expw) begin
          failures++;
          if (failures < 10) $display("FAIL tern=%0d part=%0d %h exp %h", tern, k, wdata, expw);
        end
        byp_q = wdata;
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
