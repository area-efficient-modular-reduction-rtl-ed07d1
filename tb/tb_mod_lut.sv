// tb_mod_lut: self-checking test of the pre-computed reduction table.
//
// Five tables are instantiated: the two 2-input tables of the q = 13 worked
// example (expected contents 0,3,6,9 and 0,12,11,10, typed in here), the two
// Kyber tables (q = 3329, bits 11..17 and 18..23) and one Dilithium table
// with non-adjacent bits (q = 8380417). For the last three every address is
// checked against the direct formula (value of the selected bits at their
// true weights) mod q, computed with 64-bit arithmetic in the testbench.
module tb_mod_lut;
  import modred_pkg::*;

  int checks = 0;
  int failures = 0;

  localparam mask_t DIL_MASK = mask_t'(64'h29a00400000); // bits 22,33,35,36,39,41

  logic [1:0] a13_lo, a13_hi;
  logic [3:0] f13_lo, f13_hi;
  logic [6:0] ak0;  logic [11:0] fk0;
  logic [5:0] ak1;  logic [11:0] fk1;
  logic [5:0] ad;   logic [22:0] fd;

  mod_lut #(.Q(13), .N(4), .MASK(mask_t'(64'h30))) u13_lo (.addr(a13_lo), .f(f13_lo));
  mod_lut #(.Q(13), .N(4), .MASK(mask_t'(64'hc0))) u13_hi (.addr(a13_hi), .f(f13_hi));
  mod_lut u_k0 (.addr(ak0), .f(fk0));   // defaults: Kyber first table
  mod_lut #(.Q(3329), .N(12), .MASK(mask_t'(64'hfc0000))) u_k1 (.addr(ak1), .f(fk1));
  mod_lut #(.Q(8380417), .N(23), .MASK(DIL_MASK)) u_d (.addr(ad), .f(fd));

  task automatic check(string what, longint unsigned got, longint unsigned exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // Value of address x of a table whose bits are the set bits of m, taken at
  // their true binary weights, reduced mod q.
  function automatic longint unsigned direct(longint unsigned q, mask_t m, int x);
    longint unsigned v;
    int j;
    v = 0; j = 0;
    for (int i = 0; i < 64; i++) if (m[i]) begin
      if (x[j]) v = v + (64'd1 << i);
      j++;
    end
    return v % q;
  endfunction

  int exp_lo [4] = '{0, 3, 6, 9};
  int exp_hi [4] = '{0, 12, 11, 10};

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int x = 0; x < 4; x++) begin
      a13_lo = 2'(x); a13_hi = 2'(x);
      #1;
      check($sformatf("q13 f1[%0d]", x), f13_lo, exp_lo[x]);
      check($sformatf("q13 f2[%0d]", x), f13_hi, exp_hi[x]);
    end
    for (int x = 0; x < 128; x++) begin
      ak0 = 7'(x); #1;
      check($sformatf("kyber t0[%0d]", x), fk0, direct(3329, mask_t'(64'h3f800), x));
    end
    for (int x = 0; x < 64; x++) begin
      ak1 = 6'(x); ad = 6'(x); #1;
      check($sformatf("kyber t1[%0d]", x), fk1, direct(3329, mask_t'(64'hfc0000), x));
      check($sformatf("dil t[%0d]", x), fd, direct(8380417, DIL_MASK, x));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
