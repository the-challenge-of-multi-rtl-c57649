// loa_adder: Lower-part-OR approximate adder (LOA), combinational.
//
// A B-bit addition is split in two. The L least-significant bits are not
// added but ORed bit by bit (s[i] = a[i] | b[i]). The B-L most-significant
// bits go through an exact ripple of full adders whose carry-in is the AND
// of the two operands' top approximate bits, a[L-1] & b[L-1]. L = 0 gives an
// exact adder, L = B a pure bitwise OR. The sum is B bits wide and wraps
// like any B-bit adder; callers that must not overflow widen the operands
// first. The ratio L/B is the "approximation ratio".
//
// The structure (OR gates below, one AND gate feeding the carry of the
// exact part, full adders above) follows the paper. The paper's text puts
// the l approximate bits at the bottom and the b-l exact bits on top, while
// its figure labels the boundary as bit b-l-1 / b-l; this module follows the
// text (approximate bits are [L-1:0]). The exact part is written as a '+'
// so that synthesis maps it on the device's carry chain.
//
// Interface: a_i, b_i (B bits) -> s_o (B bits), no clock.
module loa_adder #(
  parameter int unsigned B = 8,   // total bit-width b
  parameter int unsigned L = 4    // approximated low bits l, 0..B
) (
  input  logic [B-1:0] a_i,
  input  logic [B-1:0] b_i,
  output logic [B-1:0] s_o
);

  if (L > B) begin : g_bad_l
    $error("loa_adder: L (%0d) must not exceed B (%0d)", L, B);
  end

  if (L == 0) begin : g_exact
    assign s_o = a_i + b_i;
  end else begin : g_approx
    logic cin;
    assign s_o[L-1:0] = a_i[L-1:0] | b_i[L-1:0];
    assign cin        = a_i[L-1] & b_i[L-1];
    if (L < B) begin : g_upper
      assign s_o[B-1:L] = a_i[B-1:L] + b_i[B-1:L] + (B-L)'(cin);
    end
  end

endmodule
