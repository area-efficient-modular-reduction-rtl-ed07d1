// tb_full_kyber: exhaustive test of the reducer at its default (Kyber)
// configuration, q = 3329, 24-bit input, no parameter overridden.
//
// Every one of the 2^24 input words is applied and the result compared with
// c % 3329. The intermediate sum must never exceed the elaboration-time
// bound 8659 = 2047 + 3321 + 3291, and the three subtraction cases
// (0, q, 2q) are counted; the largest sum must actually be reached.
module tb_full_kyber;
  int checks = 0;
  int failures = 0;

  logic        clk = 1'b0;
  logic [23:0] c;
  logic [11:0] r;
  logic        ov;
  int          hits [3] = '{0, 0, 0};
  int          max_chat = 0;

  lut_mod_reduce dut (.clk(clk), .rst_n(1'b1), .in_valid(1'b1), .c_in(c),
                      .out_valid(ov), .c_out(r));

  initial begin
    #30000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < (1 << 24); v++) begin
      c = 24'(v);
      #1;
      checks++;
      if (r != 12'(v % 3329) || !ov) begin
        failures++;
        if (failures < 20) $display("FAIL %0d -> %0d (expected %0d)", v, r, v % 3329);
      end
      if (int'(dut.chat) > max_chat) max_chat = int'(dut.chat);
      hits[dut.sub_sel]++;
    end
    checks++;
    if (max_chat != 8659) begin
      failures++;
      $display("FAIL largest c_hat %0d, expected 8659", max_chat);
    end
    for (int i = 0; i < 3; i++) begin
      checks++;
      if (hits[i] == 0) failures++;
      $display("subtract %0d*q: %0d inputs", i, hits[i]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
