// comparator_cells_tb: exhaustive check of the three comparator cells.
//
// I_N cell: e, l and g must be a == b, a < b and a > b. TR_BME_FG cell:
// for every bit pair and every valid incoming state (equal so far, greater
// so far, or less so far), the outgoing state must be the comparison of the
// longer prefix. Worked out here from the prefix ordering: an earlier
// decision stands, otherwise the current bits decide. The four garbage
// bits are also checked against what the cell's gates pass through.
// F_F cell: for the three valid states, P and Q pass through and the third
// output is 1 only in the "less" state.
module comparator_cells_tb;
  logic a, b, p_in, q_in;
  logic e, l, g, in_gb;
  logic p_out, q_out;
  logic [3:0] tbf_gb;
  logic ff_p, ff_q, ff_l;
  int checks = 0;
  int failures = 0;

  in_cell  u_in  (.a(a), .b(b), .e(e), .l(l), .g(g), .garbage(in_gb));
  tbf_cell u_tbf (.a(a), .b(b), .p_in(p_in), .q_in(q_in),
                  .p_out(p_out), .q_out(q_out), .garbage(tbf_gb));
  ff_cell  u_ff  (.p_in(p_in), .q_in(q_in), .p_out(ff_p), .q_out(ff_q), .l_out(ff_l));

  task automatic check(string name, logic [3:0] got, logic [3:0] want);
    checks++;
    if (got !== want) begin
      failures++;
      $display("FAIL %s a=%b b=%b p=%b q=%b got %b want %b", name, a, b, p_in, q_in, got, want);
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
    // state 0 = equal so far, 1 = greater so far, 2 = less so far
    int st, nst;
    for (int i = 0; i < 4; i++) begin
      {a, b} = 2'(i);
      p_in = 1'b0; q_in = 1'b1;
      #1;
      check("I_N", {1'b0, e, l, g}, {1'b0, a == b, int'(a) < int'(b), int'(a) > int'(b)});
      check("I_N garbage", {3'b0, in_gb}, {3'b0, ~a & ~b});
      for (st = 0; st < 3; st++) begin
        q_in = (st == 0);
        p_in = (st == 1);
        #1;
        if (st != 0)     nst = st;
        else if (a == b) nst = 0;
        else if (a)      nst = 1;
        else             nst = 2;
        check("TR_BME_FG", {2'b0, p_out, q_out}, {2'b0, nst == 1, nst == 0});
        check("TR_BME_FG garbage", tbf_gb,
              {a, q_in, (~q_in & (a ~^ b)) ^ (a & ~b), p_in});
        check("F_F", {1'b0, ff_p, ff_q, ff_l}, {1'b0, st == 1, st == 0, st == 2});
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
