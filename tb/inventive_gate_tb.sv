// inventive_gate_tb: exhaustive check of the 4x4 Inventive gate.
//
// The expected outputs are the gate's published truth table, typed in
// below as a constant, not the gate's equations. All 16 input patterns are
// applied and P, Q, R and S are checked for each. The test then checks that
// the 16 output patterns are all different, which is what makes the gate
// reversible.
module inventive_gate_tb;
  logic a, b, c, d;
  logic p, q, r, s;
  int   checks = 0;
  int   failures = 0;

  inventive_gate dut (.a(a), .b(b), .c(c), .d(d), .p(p), .q(q), .r(r), .s(s));

  // Row index = {d,c,b,a}; entry = {P,Q,R,S}.
  localparam logic [3:0] TABLE [16] = '{
    4'b0010, 4'b1001, 4'b1010, 4'b0100,
    4'b1011, 4'b0101, 4'b0110, 4'b1110,
    4'b0011, 4'b1000, 4'b1101, 4'b0001,
    4'b1100, 4'b0000, 4'b0111, 4'b1111
  };

  initial begin : watchdog
    #10000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [15:0] seen;
    seen = '0;
    for (int i = 0; i < 16; i++) begin
      {d, c, b, a} = 4'(i);
      #1;
      for (int k = 0; k < 4; k++) begin
        checks++;
        if ({p, q, r, s}[3-k] !== TABLE[i][3-k]) begin
          failures++;
          $display("FAIL dcba=%04b output %s got %b want %b", 4'(i),
                   k == 0 ? "P" : k == 1 ? "Q" : k == 2 ? "R" : "S",
                   {p, q, r, s}[3-k], TABLE[i][3-k]);
        end
      end
      seen[{p, q, r, s}] = 1'b1;
    end
    checks++;
    if (seen !== 16'hFFFF) begin
      failures++;
      $display("FAIL gate is not one-to-one, outputs seen %h", seen);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
