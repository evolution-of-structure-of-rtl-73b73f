// tbf_cell: the TR_BME_FG comparator cell, one bit step of the ripple
// comparison.
//
// The cell takes the next lower bit pair (a, b) and the running result from
// the more significant bits: q_in = "equal so far", p_in = "greater so far".
// It computes
//   q_out = q_in & (a ^ b)'          still equal
//   p_out = (q_in & a & b') ^ p_in   greater, decided here or earlier
// A TR gate (a, b, 0) gives a ^ b and ab', and a NOT turns a ^ b into the
// bit equality. A BME gate (A = q_in, B = equality, C = 0, D = ab') gates
// both with q_in. A Feynman gate XORs the result into p_in. The XOR acts as
// an OR because the two terms cannot both be 1. That costs 4 gates,
// 2 constant inputs and 4 garbage outputs:
// garbage = {TR.P, BME.P, BME.S, FG.P}. Combinational.
//
// The gate structure and both output equations are those of the paper's
// Fig. 6b. The roles of the lines are read from those equations: Q is
// equality, P is greater-than.
module tbf_cell (
  input  logic       a,
  input  logic       b,
  input  logic       p_in,
  input  logic       q_in,
  output logic       p_out,
  output logic       q_out,
  output logic [3:0] garbage
);
  logic tr_p, tr_q, tr_r;
  logic bit_eq;
  logic bme_p, bme_r, bme_s;
  logic fg_p;

  tr_gate u_tr (.a(a), .b(b), .c(1'b0), .p(tr_p), .q(tr_q), .r(tr_r));

  // The 1x1 NOT gate on the TR difference output.
  always_comb bit_eq = ~tr_q;

  bme_gate u_bme (
    .a(q_in), .b(bit_eq), .c(1'b0), .d(tr_r),
    .p(bme_p), .q(q_out), .r(bme_r), .s(bme_s)
  );

  feynman_gate u_fg (.a(p_in), .b(bme_r), .p(fg_p), .q(p_out));

  always_comb garbage = {tr_p, bme_p, bme_s, fg_p};
endmodule
