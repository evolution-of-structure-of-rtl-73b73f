// ig_logic_set: the classical logic functions, each built from a single
// Inventive gate with some inputs tied to constants.
//
// Eight copies of the gate run side by side on the operands x, y and z. Each
// copy has the constant inputs of one of the paper's Fig. 1a-1h
// configurations, listed as gate inputs (a, b, c, d):
//   1a  (0, x, 0, y)  Q = AND,  R = NAND
//   1b  (x, 0, y, 0)  P = XOR,  R = NOT x, S = OR
//   1c  (x, 0, y, 1)  S = NOR
//   1d  (1, x, y, y)  P = XNOR
//   1e  (x, y, 0, 0)  half adder: P = sum, Q = carry
//   1f  (x, y, 0, 1)  half subtractor x - y: P = difference, Q = borrow
//   1g  (x, y, z, 0)  full adder: P = sum, Q = carry
//   1h  (x, y, z, 1)  full subtractor x - y - z: P = difference, Q = borrow
// The gate outputs not listed are garbage and are left open. Purely
// combinational.
//
// The constants follow the figures with two exceptions. Fig. 1h prints
// d = 0 and c = 0, but its own borrow equation (a^b)'c ^ a'b needs d = 1
// and the borrow-in on c, so that is used. Fig. 1d leaves d as a free input.
// Here d is tied to y, which makes S a second XNOR; it is not used.
module ig_logic_set
  import rev_pkg::*;
(
  input  logic     x,
  input  logic     y,
  input  logic     z,
  output ig_func_t f
);
  logic a_p, a_q, a_r, a_s;
  logic b_p, b_q, b_r, b_s;
  logic c_p, c_q, c_r, c_s;
  logic d_p, d_q, d_r, d_s;
  logic e_p, e_q, e_r, e_s;
  logic h_p, h_q, h_r, h_s;
  logic g_p, g_q, g_r, g_s;
  logic s_p, s_q, s_r, s_s;

  inventive_gate u_fig1a (.a(1'b0), .b(x),    .c(1'b0), .d(y),    .p(a_p), .q(a_q), .r(a_r), .s(a_s));
  inventive_gate u_fig1b (.a(x),    .b(1'b0), .c(y),    .d(1'b0), .p(b_p), .q(b_q), .r(b_r), .s(b_s));
  inventive_gate u_fig1c (.a(x),    .b(1'b0), .c(y),    .d(1'b1), .p(c_p), .q(c_q), .r(c_r), .s(c_s));
  inventive_gate u_fig1d (.a(1'b1), .b(x),    .c(y),    .d(y),    .p(d_p), .q(d_q), .r(d_r), .s(d_s));
  inventive_gate u_fig1e (.a(x),    .b(y),    .c(1'b0), .d(1'b0), .p(e_p), .q(e_q), .r(e_r), .s(e_s));
  inventive_gate u_fig1f (.a(x),    .b(y),    .c(1'b0), .d(1'b1), .p(h_p), .q(h_q), .r(h_r), .s(h_s));
  inventive_gate u_fig1g (.a(x),    .b(y),    .c(z),    .d(1'b0), .p(g_p), .q(g_q), .r(g_r), .s(g_s));
  inventive_gate u_fig1h (.a(x),    .b(y),    .c(z),    .d(1'b1), .p(s_p), .q(s_q), .r(s_r), .s(s_s));

  always_comb begin
    f.and_o     = a_q;
    f.nand_o    = a_r;
    f.xor_o     = b_p;
    f.not_o     = b_r;
    f.or_o      = b_s;
    f.nor_o     = c_s;
    f.xnor_o    = d_p;
    f.ha_sum    = e_p;
    f.ha_carry  = e_q;
    f.hs_diff   = h_p;
    f.hs_borrow = h_q;
    f.fa_sum    = g_p;
    f.fa_carry  = g_q;
    f.fs_diff   = s_p;
    f.fs_borrow = s_q;
  end
endmodule
