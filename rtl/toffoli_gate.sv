// toffoli_gate: 3x3 reversible Toffoli gate, P = A, Q = B, R = A B ^ C.
//
// With C = 0 the R output is the AND of A and B. The 2-to-4 decoder uses it
// that way. Combinational. The paper names this gate but does not define it,
// so the standard Toffoli definition is used.
module toffoli_gate (
  input  logic a,
  input  logic b,
  input  logic c,
  output logic p,
  output logic q,
  output logic r
);
  always_comb begin
    p = a;
    q = b;
    r = (a & b) ^ c;
  end
endmodule
