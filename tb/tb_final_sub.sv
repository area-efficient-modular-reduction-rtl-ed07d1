// tb_final_sub: self-checking test of the final conditional subtraction.
//
// Kyber sizing (q = 3329, 14-bit sum, i_max = 2) is driven exhaustively over
// every sum that can occur, 0..8659; the q = 13 example (i_max = 2) over
// 0..38. Each result is compared with chat % q and the chosen multiple with
// chat / q, both computed in the testbench; every case i = 0..2 is counted.
module tb_final_sub;
  int checks = 0;
  int failures = 0;
  int hits [3] = '{0, 0, 0};

  logic [13:0] chat_k; logic [11:0] c_k; logic [1:0] sel_k;
  logic [5:0]  chat_s; logic [3:0]  c_s; logic [1:0] sel_s;

  final_sub u_k (.chat(chat_k), .c(c_k), .sel(sel_k));
  final_sub #(.Q(13), .N(4), .SW(6), .IMAX(2)) u_s (.chat(chat_s), .c(c_s), .sel(sel_s));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v <= 8659; v++) begin
      chat_k = 14'(v); #1;
      checks++;
      if (c_k != 12'(v % 3329) || sel_k != 2'(v / 3329)) begin
        failures++;
        $display("FAIL kyber chat=%0d c=%0d sel=%0d", v, c_k, sel_k);
      end
      hits[v / 3329]++;
    end
    for (int v = 0; v < 39; v++) begin
      chat_s = 6'(v); #1;
      checks++;
      if (c_s != 4'(v % 13) || sel_s != 2'(v / 13)) begin
        failures++;
        $display("FAIL q13 chat=%0d c=%0d sel=%0d", v, c_s, sel_s);
      end
    end
    for (int i = 0; i < 3; i++) begin
      checks++;
      if (hits[i] == 0) begin failures++; $display("FAIL case %0d never hit", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
