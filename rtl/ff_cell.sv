// ff_cell: the F_F cell that ends the comparator chain.
//
// It takes the chain's final greater line p_in and equal line q_in and adds
// the third result, less-than. Because at most one of p_in and q_in is 1,
// less-than is (p_in ^ q_in)'. The first Feynman gate (q_in, 0) fans q_in
// out. The second (p_in, copy of q_in) forms p_in ^ q_in, and a NOT
// inverts it. Outputs: p_out = p_in, q_out = q_in,
// l_out = (p_in ^ q_in)'. The cell costs 3 gates, 1 constant input and no
// garbage, as in the paper. Combinational.
//
// The paper labels the outputs "P = E" and "Q = G". The TR_BME_FG equations
// make P the greater line and Q the equal line, so those labels are not
// used here. The comparator maps the outputs to gt/eq by their function.
module ff_cell (
  input  logic p_in,
  input  logic q_in,
  output logic p_out,
  output logic q_out,
  output logic l_out
);
  logic q_copy, pq_xor;

  feynman_gate u_fg1 (.a(q_in), .b(1'b0),   .p(q_out), .q(q_copy));
  feynman_gate u_fg2 (.a(p_in), .b(q_copy), .p(p_out), .q(pq_xor));

  // The 1x1 NOT gate.
  always_comb l_out = ~pq_xor;
endmodule
