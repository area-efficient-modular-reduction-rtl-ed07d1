// final_sub: the final reduction step, an (i_max+1)-case conditional
// subtraction of a multiple of q.
//
// The intermediate sum c_hat lies in [0, (i_max+1)*q). This block compares
// c_hat in parallel against every multiple i*q, i = 1..i_max, taken from a
// small constant table, picks the largest i with i*q <= c_hat and outputs
// c_hat - i*q, which is c_hat mod q. All comparators work at once, so the
// delay does not depend on the data (constant time).
//
// Interface: chat[SW-1:0] in; c[N-1:0] = chat mod q out; sel = the i that
// was subtracted (exposed for observation). Combinational.
//
// From the method: the i*q table and subtraction of the matching multiple,
// with i in {0 .. i_max}. Own choice: the selection is a thermometer of
// parallel ">=" comparators whose count of ones is i. The result is only
// defined for chat < (IMAX+1)*Q; the caller sizes IMAX from the largest
// possible sum.
module final_sub #(
  parameter longint unsigned Q    = 3329,
  parameter int unsigned     N    = 12,
  parameter int unsigned     SW   = 14,
  parameter int unsigned     IMAX = 2,
  parameter int unsigned     SELW = (IMAX < 1) ? 1 : $clog2(IMAX + 1)
) (
  input  logic [SW-1:0]   chat,
  output logic [N-1:0]    c,
  output logic [SELW-1:0] sel
);

  // i*q table, i = 0..IMAX.
  logic [SW-1:0] iq [IMAX+1];
  // ge[i] = (chat >= i*q), i = 1..IMAX (i = 0 always holds).
  logic [IMAX:1] ge;

  for (genvar i = 0; i <= IMAX; i++) begin : g_iq
    localparam longint unsigned MULT = longint'(i) * Q;
    assign iq[i] = SW'(MULT);
    if (i > 0) begin : g_cmp
      assign ge[i] = ({1'b0, chat} >= (SW+1)'(MULT));
    end
  end

  // Full-width difference; only its low N bits can be non-zero, since the
  // result is below q.
  logic [SW-1:0] diff;

  always_comb begin
    sel = '0;
    for (int unsigned i = 1; i <= IMAX; i++) sel = sel + SELW'(ge[i]);
    diff = chat - iq[sel];
    c    = diff[N-1:0];
  end

endmodule
