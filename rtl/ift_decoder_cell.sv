// ift_decoder_cell: the I_F_T reversible 2-to-4 decoder cell ("approach 2").
//
// A Feynman gate (b, 0) makes two copies of b. An Inventive gate with d = 1
// and c = 0, fed a and one copy of b, gives P = a ^ b, Q = a'b, R = a'b' and
// S = a' + b. NOT gates turn P into (a ^ b)' and S into ab'. A Toffoli gate
// ((a ^ b)', copy of b, 0) then forms (a ^ b)'b = ab. That is 5 gates and
// 2 garbage outputs, the Toffoli's two pass-through lines.
//
// Interface: m[{a,b}] is the minterm of the two inputs, so
// m[0] = a'b', m[1] = a'b, m[2] = ab', m[3] = ab. garbage = {TG.P, TG.Q}.
// Purely combinational.
//
// The gate structure is the paper's Fig. 2(b), the I_F_T cell of Fig. 3.
// Numbering the outputs by minterm is this design's choice.
module ift_decoder_cell (
  input  logic       a,
  input  logic       b,
  output logic [3:0] m,
  output logic [1:0] garbage
);
  logic b1, b2;
  logic ig_p, ig_s;
  logic xnor_ab, ab_n;

  feynman_gate u_fg (.a(b), .b(1'b0), .p(b1), .q(b2));

  inventive_gate u_ig (
    .a(a), .b(b1), .c(1'b0), .d(1'b1),
    .p(ig_p), .q(m[1]), .r(m[0]), .s(ig_s)
  );

  // The two 1x1 NOT gates.
  always_comb begin
    xnor_ab = ~ig_p;
    ab_n    = ~ig_s;
  end

  toffoli_gate u_tg (
    .a(xnor_ab), .b(b2), .c(1'b0),
    .p(garbage[1]), .q(garbage[0]), .r(m[3])
  );

  always_comb m[2] = ab_n;
endmodule
