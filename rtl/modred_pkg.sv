// modred_pkg: constants and elaboration-time functions shared by the
// LUT-based modular reducer (mod_lut, final_sub, lut_mod_reduce).
//
// The reducer replaces every high input bit c_i of a 2n-bit number by the
// constant weight (2^i mod q) instead of 2^i. Bits are grouped into tables;
// each table stores, for every pattern of its bits, the sum of the selected
// weights reduced mod q again. Everything in this package runs at
// elaboration only: it computes table contents, the largest value a table
// can emit and the largest intermediate sum, from which the number of
// cases of the final conditional subtraction follows.
//
// A table is described by a bit mask over the input vector (MAX_W bits
// wide). The table's k address bits are the set bits of the mask, taken in
// ascending order, so address bit j carries the j-th set bit of the mask.
// Grouping bits in natural order or in any other order (the regrouping
// optimisation) is therefore only a matter of the masks chosen.
package modred_pkg;

  // Widest input vector supported (2n <= 64, so moduli up to 32 bits).
  localparam int unsigned MAX_W = 64;

  typedef logic [MAX_W-1:0] mask_t;

  // 2^e mod q, by repeated doubling so no intermediate exceeds 2q.
  function automatic longint unsigned pow2_mod(int unsigned e, longint unsigned q);
    longint unsigned r;
    r = 1 % q;
    for (int unsigned j = 0; j < e; j++) begin
      r = r << 1;
      if (r >= q) r = r - q;
    end
    return r;
  endfunction

  // Number of address bits of a table = set bits of its mask.
  function automatic int unsigned mask_bits(mask_t m);
    int unsigned c;
    c = 0;
    for (int unsigned i = 0; i < MAX_W; i++) if (m[i]) c++;
    return c;
  endfunction

  // Table entry for address x: (sum over selected bits of 2^i mod q) mod q.
  function automatic longint unsigned table_entry(longint unsigned q, mask_t m,
                                                  longint unsigned x);
    longint unsigned acc;
    int unsigned     j;
    acc = 0;
    j   = 0;
    for (int unsigned i = 0; i < MAX_W; i++) begin
      if (m[i]) begin
        if (x[j]) begin
          acc = acc + pow2_mod(i, q);
          if (acc >= q) acc = acc - q;
        end
        j++;
      end
    end
    return acc;
  endfunction

  // Largest entry of a table, max(f[x]) over all 2^k addresses.
  function automatic longint unsigned table_max(longint unsigned q, mask_t m);
    longint unsigned best;
    longint unsigned e;
    int unsigned     k;
    best = 0;
    k    = mask_bits(m);
    for (longint unsigned x = 0; x < (64'd1 << k); x++) begin
      e = table_entry(q, m, x);
      if (e > best) best = e;
    end
    return best;
  endfunction

  // Bits needed to hold values 0..v.
  function automatic int unsigned bits_for(longint unsigned v);
    int unsigned b;
    b = 1;
    while (b < MAX_W && (v >> b) != 0) b++;
    return b;
  endfunction

endpackage
