// feynman_gate: 2x2 reversible Feynman (controlled-NOT) gate,
// P = A, Q = A ^ B.
//
// With B = 0 it copies A to both outputs (fan-out, which reversible logic
// cannot do with a plain wire). Otherwise it forms an XOR. Combinational.
// The equations are the paper's. The paper calls the second output R.
module feynman_gate (
  input  logic a,
  input  logic b,
  output logic p,
  output logic q
);
  always_comb begin
    p = a;
    q = a ^ b;
  end
endmodule
