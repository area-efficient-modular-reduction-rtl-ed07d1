// tb_lut_sum: self-checking test of the multi-operand adder.
//
// Uses the Kyber shape (3 operands of 12 bits, 14-bit sum) and the Dilithium
// shape (5 operands of 23 bits, 26-bit sum). Random operands plus the
// all-ones corner are summed in the testbench with 64-bit integers and
// compared with the adder's output.
module tb_lut_sum;
  int checks = 0;
  int failures = 0;

  logic [2:0][11:0] tk;  logic [13:0] sk;
  logic [4:0][22:0] td;  logic [25:0] sd;

  lut_sum u_k (.terms(tk), .sum(sk));
  lut_sum #(.NUM(5), .W(23), .SW(26)) u_d (.terms(td), .sum(sd));

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint unsigned ek, ed;
    for (int it = 0; it < 2000; it++) begin
      ek = 0; ed = 0;
      for (int t = 0; t < 3; t++) begin
        tk[t] = (it == 0) ? '1 : 12'($urandom);
        ek += tk[t];
      end
      // keep the Kyber sum within 14 bits as in the reducer (<= 8659)
      if (ek > 16383) begin tk[0] = '0; ek = tk[1] + tk[2]; end
      for (int t = 0; t < 5; t++) begin
        td[t] = (it == 0) ? '1 : 23'($urandom);
        ed += td[t];
      end
      #1;
      checks++;
      if (sk != 14'(ek)) begin failures++; $display("FAIL kyber sum %0d exp %0d", sk, ek); end
      checks++;
      if (sd != 26'(ed)) begin failures++; $display("FAIL dil sum %0d exp %0d", sd, ed); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
