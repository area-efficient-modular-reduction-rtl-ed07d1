// tb_workload_dilithium: the reducer configured for the Dilithium modulus
// q = 8380417 (n = 23, 46-bit input, bits 0..21 bypass, the top 24 bits in
// four 6-input tables).
//
// Two groupings of the 24 table bits are compared:
//   u_nat  natural order, bits 22..27, 28..33, 34..39, 40..45. Largest sum
//          25934593 = 3.09 q, so four subtraction cases (i = 0..3).
//   u_reg  regrouped: {22,33,35,36,39,41} {23,25,31,34,38,40}
//          {29,32,42,43,44,45} {24,26,27,28,30,37}. Largest sum
//          23603709 = 2.82 q, so only three cases (i = 0..2).
// The testbench finds each table's largest entry itself (64-bit arithmetic),
// builds the input that reaches the largest sum, and checks the sum and the
// case chosen. Then random products a*b (a, b < q) and random 46-bit words
// are reduced by both and compared with c % q.
module tb_workload_dilithium;
  import modred_pkg::*;

  int checks = 0;
  int failures = 0;

  localparam longint unsigned Q = 8380417;
  localparam mask_t [3:0] NAT = {mask_t'(64'h3f0000000000), mask_t'(64'hfc00000000),
                                 mask_t'(64'h3f0000000),    mask_t'(64'hfc00000)};
  localparam mask_t [3:0] REG = {mask_t'(64'h205d000000),   mask_t'(64'h3c0120000000),
                                 mask_t'(64'h14482800000),  mask_t'(64'h29a00400000)};

  logic        clk = 1'b0;
  logic [45:0] c;
  logic [22:0] r_nat, r_reg;
  logic        v_nat, v_reg;

  lut_mod_reduce #(.Q(Q), .NT(4), .TABLE_MASK(NAT)) u_nat (
    .clk(clk), .rst_n(1'b1), .in_valid(1'b1), .c_in(c), .out_valid(v_nat), .c_out(r_nat));
  lut_mod_reduce #(.Q(Q), .NT(4), .TABLE_MASK(REG)) u_reg (
    .clk(clk), .rst_n(1'b1), .in_valid(1'b1), .c_in(c), .out_valid(v_reg), .c_out(r_reg));

  task automatic check(string what, longint unsigned got, longint unsigned exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // input word with the bits of mask m set from table address x
  function automatic longint unsigned spread(mask_t m, int x);
    longint unsigned w;
    int j;
    w = 0; j = 0;
    for (int i = 0; i < 64; i++) if (m[i]) begin
      if (x[j]) w |= (64'd1 << i);
      j++;
    end
    return w;
  endfunction

  // input that maximises c_hat, and that maximum, for a set of masks
  task automatic worst(input mask_t [3:0] ms, output longint unsigned w,
                       output longint unsigned s);
    longint unsigned best, bx, v;
    w = (64'd1 << 22) - 1;
    s = w;
    for (int t = 0; t < 4; t++) begin
      best = 0; bx = 0;
      for (int x = 0; x < 64; x++) begin
        v = spread(ms[t], x) % Q;
        if (v > best) begin best = v; bx = spread(ms[t], x); end
      end
      w |= bx;
      s += best;
    end
  endtask

  int hit_nat [4] = '{0, 0, 0, 0};
  int hit_reg [3] = '{0, 0, 0};

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint unsigned w, s, a, b;
    worst(NAT, w, s);
    c = 46'(w); #1;
    check("natural max c_hat", u_nat.chat, s);
    check("natural max c_hat value", s, 25934593);
    check("natural worst case i", u_nat.sub_sel, 3);
    check("natural worst result", r_nat, w % Q);
    worst(REG, w, s);
    c = 46'(w); #1;
    check("regrouped max c_hat", u_reg.chat, s);
    check("regrouped max c_hat value", s, 23603709);
    check("regrouped worst case i", u_reg.sub_sel, 2);
    check("regrouped worst result", r_reg, w % Q);
    check("regrouped select width", $bits(u_reg.sub_sel), 2);

    for (int it = 0; it < 300000; it++) begin
      if (it % 2 == 0) begin
        a = longint'($urandom) % Q;
        b = longint'($urandom) % Q;
        if (it == 0) begin a = Q - 1; b = Q - 1; end
        w = a * b;
      end else begin
        w = {$urandom, $urandom};
        w = w & ((64'd1 << 46) - 1);
        if (it == 1) w = (64'd1 << 46) - 1;
      end
      c = 46'(w);
      #1;
      check($sformatf("nat %0d", w), r_nat, w % Q);
      check($sformatf("reg %0d", w), r_reg, w % Q);
      hit_nat[u_nat.sub_sel]++;
      hit_reg[u_reg.sub_sel]++;
    end
    for (int i = 0; i < 4; i++) begin
      $display("natural grouping, subtract %0d*q: %0d", i, hit_nat[i]);
      checks++; if (hit_nat[i] == 0) failures++;
    end
    for (int i = 0; i < 3; i++) begin
      $display("regrouped,        subtract %0d*q: %0d", i, hit_reg[i]);
      checks++; if (hit_reg[i] == 0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
