// ig_logic_set_tb: exhaustive check of the functions built from single
// Inventive gates.
//
// All 8 patterns of (x, y, z) are applied. The logic functions are compared
// with SystemVerilog operators. The adders and subtractors are compared
// with integer arithmetic: {carry, sum} = x + y (+ z), and
// {borrow, difference} is the two-bit two's-complement result of
// x - y (- z).
module ig_logic_set_tb
  import rev_pkg::*;
;
  logic     x, y, z;
  ig_func_t f;
  int       checks = 0;
  int       failures = 0;

  ig_logic_set dut (.x(x), .y(y), .z(z), .f(f));

  task automatic check(string name, logic got, logic want);
    checks++;
    if (got !== want) begin
      failures++;
      $display("FAIL %s xyz=%b%b%b got %b want %b", name, x, y, z, got, want);
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
    int sum2, sum3, dif2, dif3;
    for (int i = 0; i < 8; i++) begin
      {x, y, z} = 3'(i);
      #1;
      sum2 = int'(x) + int'(y);
      sum3 = sum2 + int'(z);
      dif2 = int'(x) - int'(y);
      dif3 = dif2 - int'(z);
      check("AND",  f.and_o,  x & y);
      check("NAND", f.nand_o, ~(x & y));
      check("XOR",  f.xor_o,  x ^ y);
      check("NOT",  f.not_o,  ~x);
      check("OR",   f.or_o,   x | y);
      check("NOR",  f.nor_o,  ~(x | y));
      check("XNOR", f.xnor_o, ~(x ^ y));
      check("HA sum",    f.ha_sum,    sum2[0]);
      check("HA carry",  f.ha_carry,  sum2[1]);
      check("HS diff",   f.hs_diff,   dif2[0]);
      check("HS borrow", f.hs_borrow, dif2 < 0);
      check("FA sum",    f.fa_sum,    sum3[0]);
      check("FA carry",  f.fa_carry,  sum3[1]);
      check("FS diff",   f.fs_diff,   dif3[0]);
      check("FS borrow", f.fs_borrow, dif3 < 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
