// rev_decoder_tb: self-checking test of the I_F_T 2-to-4 cell and the
// n-to-2^n reversible decoder.
//
// The 2-to-4 cell and decoders with N = 2, 3 (the default, built without a
// parameter override), 4, 5 and 8 see every input value. Each output must
// be one-hot with bit x set. The expected vector is 1 << x. The cell's four
// minterms are checked against the products a'b', a'b, ab', ab. The cell's
// garbage lines are checked against what its Toffoli gate passes through.
// The garbage widths must equal n and the gate-count formula must give
// 2^n + 1, as the paper's lemmas state.
module rev_decoder_tb
  import rev_pkg::*;
;
  logic [7:0] x;
  logic [3:0] m;
  logic [1:0] cg;
  logic [3:0]   y2;  logic [1:0] g2;
  logic [7:0]   y3;  logic [2:0] g3;
  logic [15:0]  y4;  logic [3:0] g4;
  logic [31:0]  y5;  logic [4:0] g5;
  logic [255:0] y8;  logic [7:0] g8;
  int checks = 0;
  int failures = 0;

  ift_decoder_cell u_cell (.a(x[1]), .b(x[0]), .m(m), .garbage(cg));
  rev_decoder #(.N(2)) u2 (.x(x[1:0]), .y(y2), .garbage(g2));
  rev_decoder          u3 (.x(x[2:0]), .y(y3), .garbage(g3));
  rev_decoder #(.N(4)) u4 (.x(x[3:0]), .y(y4), .garbage(g4));
  rev_decoder #(.N(5)) u5 (.x(x[4:0]), .y(y5), .garbage(g5));
  rev_decoder #(.N(8)) u8 (.x(x),      .y(y8), .garbage(g8));

  task automatic check_vec(string name, logic [255:0] got, logic [255:0] want);
    checks++;
    if (got !== want) begin
      failures++;
      $display("FAIL %s x=%0d got %h want %h", name, x, got, want);
    end
  endtask

  task automatic check_num(string name, int got, int want);
    checks++;
    if (got != want) begin
      failures++;
      $display("FAIL %s = %0d, expected %0d", name, got, want);
    end
  endtask

  initial begin : watchdog
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic a, b;
    check_num("garbage width n=2", $bits(g2), 2);
    check_num("garbage width n=3", $bits(g3), 3);
    check_num("garbage width n=8", $bits(g8), 8);
    check_num("gates n=2", int'(dec_gates(2)), 5);
    check_num("gates n=3", int'(dec_gates(3)), 9);
    check_num("gates n=8", int'(dec_gates(8)), 257);
    for (int i = 0; i < 256; i++) begin
      x = 8'(i);
      #1;
      {a, b} = x[1:0];
      check_vec("I_F_T cell", {252'b0, m},
                {252'b0, a & b, a & ~b, ~a & b, ~a & ~b});
      check_vec("I_F_T garbage", {254'b0, cg}, {254'b0, a ~^ b, b});
      check_vec("2-to-4",   {252'b0, y2},  256'(1) << x[1:0]);
      check_vec("3-to-8",   {248'b0, y3},  256'(1) << x[2:0]);
      check_vec("4-to-16",  {240'b0, y4},  256'(1) << x[3:0]);
      check_vec("5-to-32",  {224'b0, y5},  256'(1) << x[4:0]);
      check_vec("8-to-256", y8,            256'(1) << x);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
