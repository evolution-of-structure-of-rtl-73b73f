// inventive_gate: the 4x4 reversible "Inventive" gate.
//
// The gate maps (a,b,c,d) to (P,Q,R,S) one to one, so its inputs can always
// be recovered from its outputs. The output functions are
//   P = a ^ b ^ c
//   Q = ((a ^ b) ^ d) c  ^  b (a ^ d)
//   R = a'(b'c' + d') + b c
//   S = b'd'(a + c) + d (b + a'c')
// With some inputs tied to constants it acts as AND, NAND, OR, NOR, XOR,
// XNOR, a half/full adder and a half/full subtractor. It is also the first
// stage of the 1-bit comparator and of the 2-to-4 decoder.
//
// Purely combinational, no clock. The equations and truth table are the
// paper's. Its R equation is given in two forms. The form used here is the
// one that matches the paper's truth table, with separate bars on b, c
// and d.
module inventive_gate (
  input  logic a,
  input  logic b,
  input  logic c,
  input  logic d,
  output logic p,
  output logic q,
  output logic r,
  output logic s
);
  always_comb begin
    p = a ^ b ^ c;
    q = (((a ^ b) ^ d) & c) ^ (b & (a ^ d));
    r = (~a & ((~b & ~c) | ~d)) | (b & c);
    s = (~b & ~d & (a | c)) | (d & (b | (~a & ~c)));
  end
endmodule
