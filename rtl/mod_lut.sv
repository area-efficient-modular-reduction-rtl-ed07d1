// mod_lut: one k-input, n-output pre-computed reduction table.
//
// The table receives k bits of the number being reduced. Each bit c_i stands
// for the constant 2^i mod q; the stored word for an address is the sum of
// the constants whose bits are set, reduced mod q once more, so every entry
// is an element of Z_q (0 .. q-1). This is the "k -> n-bit LUT" of the
// hardware-optimised reduction scheme: the dashed adder and "mod q" boxes
// drawn inside each table exist only at elaboration time, when the 2^k
// entries are computed; the hardware is a plain read-only array.
//
// Which input bits feed the table is given by MASK, a bit mask over the
// input vector; address bit j is the j-th set bit of MASK, counted from the
// least significant end. The caller gathers those bits into `addr`.
//
// Interface: addr[K-1:0] in, f[N-1:0] out. Purely combinational; the output
// follows the address within the same cycle.
//
// From the method: the table contents and their reduction mod q. Own
// choices: the mask-based description of which bits a table takes, and that
// the table is written as a constant array indexed by the address.
module mod_lut
  import modred_pkg::*;
#(
  parameter longint unsigned Q    = 3329,           // static modulus
  parameter int unsigned     N    = 12,             // n = ceil(log2 q), output width
  parameter mask_t           MASK = mask_t'(64'h3f800), // bits 11..17 (Kyber, first table)
  parameter int unsigned     K    = mask_bits(MASK)  // table inputs
) (
  input  logic [K-1:0] addr,
  output logic [N-1:0] f
);

  // ROM contents, one constant per address, fixed at elaboration.
  logic [N-1:0] rom [2**K];

  for (genvar x = 0; x < 2**K; x++) begin : g_rom
    localparam longint unsigned ENTRY = table_entry(Q, MASK, longint'(x));
    assign rom[x] = N'(ENTRY);
  end

  assign f = rom[addr];

endmodule
