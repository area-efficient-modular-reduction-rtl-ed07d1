// lut_mod_reduce: modular reduction of a 2n-bit number by a static modulus q
// using look-up tables, one adder and a small conditional subtraction; no
// multiplier.
//
// How it works. The input c_tilde (typically the product of two elements of
// Z_q) is split by bit masks. The bits named in no mask (the low bits) are
// passed on unchanged as one binary number. Every table TABLE_MASK[t] turns
// its bits into (sum of 2^i mod q) mod q, an element of Z_q (mod_lut). The
// bypass term and the NT table outputs are added (lut_sum) into c_hat, which
// is congruent to c_tilde mod q and smaller than (IMAX+1)*q. The final stage
// (final_sub) subtracts the right multiple i*q, i in 0..IMAX.
//
// Everything that depends on q is computed at elaboration: the table
// contents, the largest sum CHAT_MAX = (bypass maximum) + sum of the
// largest entry of each table, the sum width SW and the number of
// subtraction cases IMAX = floor(CHAT_MAX / q). Moving bit n-1 into a table
// or regrouping which bits share a table (both only a change of masks)
// lowers CHAT_MAX and can remove a subtraction case.
//
// Defaults: the Kyber configuration, q = 3329, n = 12, a 24-bit input; the
// n+1 = 13 top bits (11..23) go to a 7-input table (bits 11..17) and a
// 6-input table (bits 18..23); bits 0..10 bypass. This gives CHAT_MAX =
// 2047 + 3321 + 3291 = 8659 and IMAX = 2.
//
// Interface and timing. c_in/in_valid in, c_out/out_valid out. PIPE selects
// register stages: 0 = fully combinational (clk and rst_n unused, out_valid
// = in_valid); 1 = one register on c_hat between the adder and the final
// subtraction; 2 = additionally a register on the bypass term and table
// outputs. A new input is accepted every cycle; latency is PIPE cycles.
// rst_n is an active-low synchronous reset that clears the valid bits only.
//
// What follows the method: the dataflow bypass -> tables -> sum -> i*q
// subtraction, the table contents, and the Kyber/Dilithium groupings of the
// n+1 top bits into 7+6 and 6+6+6+6 input tables. Own choices: the mask
// description of the grouping, which of the Kyber tables takes 7 bits, the
// optional pipeline registers and the valid/reset handshake.
module lut_mod_reduce
  import modred_pkg::*;
#(
  parameter longint unsigned Q    = 3329,           // static modulus
  parameter int unsigned     N    = $clog2(Q),      // n, bits of an element of Z_q
  parameter int unsigned     W_IN = 2 * N,          // width of the number reduced
  parameter int unsigned     NT   = 2,              // number of tables (N/k)
  parameter mask_t [NT-1:0]  TABLE_MASK = {mask_t'(64'hfc0000), mask_t'(64'h3f800)},
  parameter int unsigned     PIPE = 0               // register stages, 0..2
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  input  logic [W_IN-1:0] c_in,
  output logic            out_valid,
  output logic [N-1:0]    c_out
);

  // ---------------------------------------------------------------- sizing
  function automatic mask_t all_tables();
    mask_t m;
    m = '0;
    for (int unsigned t = 0; t < NT; t++) m = m | TABLE_MASK[t];
    return m;
  endfunction

  function automatic longint unsigned tables_max();
    longint unsigned s;
    s = 0;
    for (int unsigned t = 0; t < NT; t++) s = s + table_max(Q, TABLE_MASK[t]);
    return s;
  endfunction

  function automatic bit masks_disjoint();
    mask_t seen;
    seen = '0;
    for (int unsigned t = 0; t < NT; t++) begin
      if ((seen & TABLE_MASK[t]) != '0) return 1'b0;
      seen = seen | TABLE_MASK[t];
    end
    return 1'b1;
  endfunction

  localparam mask_t           IN_MASK     = (W_IN >= MAX_W) ? '1 : ((mask_t'(1) << W_IN) - 1);
  localparam mask_t           BYPASS_MASK = IN_MASK & ~all_tables();
  localparam longint unsigned CHAT_MAX    = longint'(BYPASS_MASK) + tables_max();
  localparam int unsigned     SW          = bits_for(CHAT_MAX);
  localparam int unsigned     IMAX        = int'(CHAT_MAX / Q);
  localparam int unsigned     SELW        = (IMAX < 1) ? 1 : $clog2(IMAX + 1);

  // Configuration rules: every table bit lies inside the input, tables do
  // not share bits, and the bypass bits fit in an n-bit term.
  if (W_IN > MAX_W || (all_tables() & ~IN_MASK) != '0 || !masks_disjoint()
      || (BYPASS_MASK >> N) != '0 || PIPE > 2) begin : g_bad_config
    $error("lut_mod_reduce: invalid TABLE_MASK / width / PIPE configuration");
  end

  // ---------------------------------------------------------- table stage
  // terms[0] is the bypass term, terms[1+t] the output of table t.
  logic [NT:0][N-1:0] terms;

  assign terms[0] = N'(c_in & W_IN'(BYPASS_MASK));

  for (genvar t = 0; t < NT; t++) begin : g_tab
    localparam mask_t       M = TABLE_MASK[t];
    localparam int unsigned K = mask_bits(M);
    logic [K-1:0] addr;

    // Gather the masked input bits, lowest first, into the table address.
    always_comb begin
      int unsigned j;
      j    = 0;
      addr = '0;
      for (int unsigned i = 0; i < W_IN; i++) begin
        if (M[i]) begin
          addr[j] = c_in[i];
          j++;
        end
      end
    end

    mod_lut #(.Q(Q), .N(N), .MASK(M), .K(K)) u_lut (
      .addr(addr),
      .f   (terms[1+t])
    );
  end

  // Optional register on the table stage (PIPE == 2).
  logic [NT:0][N-1:0] terms_s;
  logic               v_s;

  if (PIPE >= 2) begin : g_pipe_tab
    always_ff @(posedge clk) begin
      terms_s <= terms;
      if (!rst_n) v_s <= 1'b0;
      else        v_s <= in_valid;
    end
  end else begin : g_nopipe_tab
    assign terms_s = terms;
    assign v_s     = in_valid;
  end

  // ------------------------------------------------------------ sum stage
  logic [SW-1:0] chat;

  lut_sum #(.NUM(NT + 1), .W(N), .SW(SW)) u_sum (
    .terms(terms_s),
    .sum  (chat)
  );

  // Optional register on c_hat (PIPE >= 1).
  logic [SW-1:0] chat_s;
  logic          v_c;

  if (PIPE >= 1) begin : g_pipe_sum
    always_ff @(posedge clk) begin
      chat_s <= chat;
      if (!rst_n) v_c <= 1'b0;
      else        v_c <= v_s;
    end
  end else begin : g_nopipe_sum
    assign chat_s = chat;
    assign v_c    = v_s;
  end

  // ------------------------------------------------- final subtraction
  // sub_sel (the multiple of q subtracted) has no output port; it is kept
  // for observation in simulation.
  logic [SELW-1:0] sub_sel;

  final_sub #(.Q(Q), .N(N), .SW(SW), .IMAX(IMAX), .SELW(SELW)) u_final (
    .chat(chat_s),
    .c   (c_out),
    .sel (sub_sel)
  );

  assign out_valid = v_c;

endmodule
