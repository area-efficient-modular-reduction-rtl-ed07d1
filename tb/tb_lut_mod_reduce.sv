// tb_lut_mod_reduce: end-to-end test of the LUT-based modular reducer.
//
// Instances:
//   u_ex2   q = 13, n = 4, two 2-input tables on bits 4..7, bits 0..3 bypass
//           (the hardware-optimised worked example). 210 must give
//           c_hat = 15, multiple i = 1, result 2; all 256 inputs checked.
//   u_ex1   q = 13 with four 1-input tables (the basic, ungrouped scheme):
//           210 gives c_hat = 28, i = 2, result 2; all 256 inputs checked,
//           and the case i = 3 (max c_hat = 47) must occur.
//   u_k0/1/2  the Kyber configuration (q = 3329) with PIPE = 0, 1, 2, fed
//           the same random stream with random bubbles after a reset. Each
//           output is checked against c % q and its latency against PIPE.
// The largest product (q-1)^2 and the all-ones word are included.
// Mechanisms counted (each must occur): every subtraction case i of every
// instance, pipeline bubbles, valid outputs suppressed by reset.
module tb_lut_mod_reduce;
  import modred_pkg::*;

  int checks = 0;
  int failures = 0;

  localparam longint unsigned QK = 3329;
  localparam int NCYC = 40000;

  logic clk = 1'b0;
  logic rst_n;

  // ---------------------------------------------------------------- q = 13
  logic [7:0] c13;
  logic [3:0] r_ex2, r_ex1;
  logic       v_ex2, v_ex1;

  lut_mod_reduce #(.Q(13), .NT(2),
                   .TABLE_MASK({mask_t'(64'hc0), mask_t'(64'h30)})) u_ex2 (
    .clk(clk), .rst_n(rst_n), .in_valid(1'b1), .c_in(c13), .out_valid(v_ex2), .c_out(r_ex2));

  lut_mod_reduce #(.Q(13), .NT(4),
                   .TABLE_MASK({mask_t'(64'h80), mask_t'(64'h40),
                                mask_t'(64'h20), mask_t'(64'h10)})) u_ex1 (
    .clk(clk), .rst_n(rst_n), .in_valid(1'b1), .c_in(c13), .out_valid(v_ex1), .c_out(r_ex1));

  // ----------------------------------------------------------------- Kyber
  logic [23:0] ck;
  logic        vk;
  logic [11:0] rk [3];
  logic        ovk [3];

  lut_mod_reduce #(.PIPE(0)) u_k0 (.clk(clk), .rst_n(rst_n), .in_valid(vk), .c_in(ck),
                                   .out_valid(ovk[0]), .c_out(rk[0]));
  lut_mod_reduce #(.PIPE(1)) u_k1 (.clk(clk), .rst_n(rst_n), .in_valid(vk), .c_in(ck),
                                   .out_valid(ovk[1]), .c_out(rk[1]));
  lut_mod_reduce #(.PIPE(2)) u_k2 (.clk(clk), .rst_n(rst_n), .in_valid(vk), .c_in(ck),
                                   .out_valid(ovk[2]), .c_out(rk[2]));

  always #5 clk = ~clk;

  task automatic check(string what, longint unsigned got, longint unsigned exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic need(string what, int count);
    checks++;
    if (count == 0) begin
      failures++;
      $display("FAIL mechanism never exercised: %s", what);
    end else $display("  %-34s %0d", what, count);
  endtask

  // stimulus history, indexed by negedge number
  logic [23:0] hist_c [NCYC];
  logic        hist_v [NCYC];

  int hit_ex2 [3] = '{0, 0, 0};
  int hit_ex1 [4] = '{0, 0, 0, 0};
  int hit_k   [3][3];
  int bubbles = 0;
  int reset_masked = 0;

  initial begin
    repeat (NCYC + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (hit_k[p, i]) hit_k[p][i] = 0;
    rst_n = 1'b0;
    vk    = 1'b0;
    ck    = '0;

    // ----- worked examples, combinational
    c13 = 8'd210;
    #1;
    check("ex2 210 mod 13", r_ex2, 2);
    check("ex2 c_hat", u_ex2.chat, 15);
    check("ex2 i", u_ex2.sub_sel, 1);
    check("ex1 210 mod 13", r_ex1, 2);
    check("ex1 c_hat", u_ex1.chat, 28);
    check("ex1 i", u_ex1.sub_sel, 2);
    for (int v = 0; v < 256; v++) begin
      c13 = 8'(v);
      #1;
      check($sformatf("ex2 %0d", v), r_ex2, v % 13);
      check($sformatf("ex1 %0d", v), r_ex1, v % 13);
      check("ex2 c_hat bound", u_ex2.chat <= 36, 1);
      check("ex1 c_hat bound", u_ex1.chat <= 47, 1);
      hit_ex2[u_ex2.sub_sel]++;
      hit_ex1[u_ex1.sub_sel]++;
    end

    // ----- Kyber stream
    for (int m = 0; m < NCYC; m++) begin
      @(negedge clk);
      // check outputs of the pipelined copies (state after the last posedge)
      if (m >= 4) begin
        for (int p = 1; p <= 2; p++) begin
          check($sformatf("k%0d valid @%0d", p, m), ovk[p], hist_v[m-p]);
          if (hist_v[m-p]) begin
            check($sformatf("k%0d %0d", p, hist_c[m-p]), rk[p], hist_c[m-p] % QK);
            hit_k[p][(p == 1) ? u_k1.sub_sel : u_k2.sub_sel]++;
          end
          if (!ovk[p] && m - p < 4 && m - p >= 0) reset_masked++;
        end
      end
      // new input
      rst_n = (m >= 4);
      vk    = ($urandom_range(0, 7) != 0);
      case (m)
        10:      ck = 24'((QK - 1) * (QK - 1));
        11:      ck = '1;
        default: ck = (m % 2 == 0) ? 24'($urandom_range(0, (QK - 1) * (QK - 1)))
                                   : 24'($urandom);
      endcase
      hist_c[m] = ck;
      hist_v[m] = vk && (m >= 4);
      if (m >= 4 && !vk) bubbles++;
      #1;
      // combinational copy: same cycle
      check("k0 valid", ovk[0], vk);
      check($sformatf("k0 %0d", ck), rk[0], ck % QK);
      hit_k[0][u_k0.sub_sel]++;
    end

    $display("mechanisms:");
    for (int i = 0; i < 3; i++) need($sformatf("q13 grouped, subtract %0d*q", i), hit_ex2[i]);
    for (int i = 0; i < 4; i++) need($sformatf("q13 basic, subtract %0d*q", i), hit_ex1[i]);
    for (int p = 0; p < 3; p++)
      for (int i = 0; i < 3; i++) need($sformatf("kyber PIPE=%0d, subtract %0d*q", p, i), hit_k[p][i]);
    need("pipeline bubbles", bubbles);
    need("valid suppressed by reset", reset_masked);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
