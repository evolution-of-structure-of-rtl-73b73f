// prim_gates_tb: exhaustive check of the TR, BME, Feynman, Toffoli and
// Fredkin gates.
//
// Every input pattern is applied to every gate. The outputs are compared
// with the gate definitions written out independently here. The Fredkin
// gate, for instance, is checked as a conditional swap, not through its
// sum-of-products form. Each gate except BME is also checked to be
// one-to-one. The BME equations used here (P = A, Q = AB ^ C, R = AD ^ C,
// S = A'B ^ C ^ D) give Q = R = C whenever A = 0, so they are not one-to-one
// and only their function is checked.
module prim_gates_tb;
  logic [3:0] in;
  logic tr_p, tr_q, tr_r;
  logic bm_p, bm_q, bm_r, bm_s;
  logic fg_p, fg_q;
  logic tg_p, tg_q, tg_r;
  logic fr_p, fr_q, fr_r;
  int   checks = 0;
  int   failures = 0;

  tr_gate      u_tr (.a(in[0]), .b(in[1]), .c(in[2]), .p(tr_p), .q(tr_q), .r(tr_r));
  bme_gate     u_bm (.a(in[0]), .b(in[1]), .c(in[2]), .d(in[3]),
                     .p(bm_p), .q(bm_q), .r(bm_r), .s(bm_s));
  feynman_gate u_fg (.a(in[0]), .b(in[1]), .p(fg_p), .q(fg_q));
  toffoli_gate u_tg (.a(in[0]), .b(in[1]), .c(in[2]), .p(tg_p), .q(tg_q), .r(tg_r));
  fredkin_gate u_fr (.a(in[0]), .b(in[1]), .c(in[2]), .p(fr_p), .q(fr_q), .r(fr_r));

  task automatic check(string name, logic [3:0] got, logic [3:0] want);
    checks++;
    if (got !== want) begin
      failures++;
      $display("FAIL %s in=%04b got %04b want %04b", name, in, got, want);
    end
  endtask

  initial begin : watchdog
    #10000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0]  seen_tr, seen_tg, seen_fr;
    logic [3:0]  seen_fg;
    logic A, B, C, D;
    seen_tr = '0; seen_tg = '0; seen_fr = '0; seen_fg = '0;
    for (int i = 0; i < 16; i++) begin
      in = 4'(i);
      {D, C, B, A} = in;
      #1;
      // BME uses all four inputs.
      check("BME", {bm_p, bm_q, bm_r, bm_s},
            {A, (A && B) != C, (A && D) != C, ((!A && B) != C) != D});
      if (i < 8) begin
        check("TR", {1'b0, tr_p, tr_q, tr_r}, {1'b0, A, A != B, (A && !B) != C});
        check("TG", {1'b0, tg_p, tg_q, tg_r}, {1'b0, A, B, (A && B) != C});
        if (A) check("FRG", {1'b0, fr_p, fr_q, fr_r}, {1'b0, A, C, B});
        else   check("FRG", {1'b0, fr_p, fr_q, fr_r}, {1'b0, A, B, C});
        seen_tr[{tr_p, tr_q, tr_r}] = 1'b1;
        seen_tg[{tg_p, tg_q, tg_r}] = 1'b1;
        seen_fr[{fr_p, fr_q, fr_r}] = 1'b1;
      end
      if (i < 4) begin
        check("FG", {2'b00, fg_p, fg_q}, {2'b00, A, A != B});
        seen_fg[{fg_p, fg_q}] = 1'b1;
      end
    end
    checks++;
    if (seen_tr !== '1 || seen_tg !== '1 || seen_fr !== '1 || seen_fg !== '1) begin
      failures++;
      $display("FAIL a gate is not one-to-one");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
