// tb_fp64_mul: self-checking testbench for fp64_mul. Random normal doubles (exponents within
// +-300 of the bias, so no overflow or subnormal result), operands of equal magnitude and the
// IEEE special cases are applied; every result is compared bit for bit with the simulator's own
// double-precision arithmetic ($bitstoreal / $realtobits), which rounds to nearest even.
module tb_fp64_mul;
  logic [63:0] a, b, y;
  int checks = 0, failures = 0;
  bit clk = 0;

  fp64_mul dut (.a(a), .b(b), .p(y));

  always #5 clk = ~clk;
  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [63:0] rnd_double(int span);
    logic [63:0] v;
    int e;
    e = 1023 + int'($urandom_range(2 * span)) - span;
    v = {1'($urandom), 11'(e), 20'($urandom), 32'($urandom)};
    return v;
  endfunction

  task automatic check(logic [63:0] x, logic [63:0] z, logic [63:0] expv);
    a = x; b = z;
    #1;
    checks++;
    if (y !== expv) begin
      failures++;
      if (failures < 10) $display("FAIL %h * %h = %h, expected %h", x, z, y, expv);
    end
  endtask

  function automatic logic [63:0] ref_op(logic [63:0] x, logic [63:0] z);
    return $realtobits($bitstoreal(x) * $bitstoreal(z));
  endfunction

  initial begin
    logic [63:0] x, z;
    for (int i = 0; i < 20000; i++) begin
      x = rnd_double(300);
      z = rnd_double((i % 4 == 0) ? 3 : 300);
      check(x, z, ref_op(x, z));
    end
    // equal magnitudes, opposite and same signs; exact cancellation
    for (int i = 0; i < 200; i++) begin
      x = rnd_double(50);
      check(x, {~x[63], x[62:0]}, ref_op(x, {~x[63], x[62:0]}));
      check(x, x, ref_op(x, x));
      z = x; z[0] = ~z[0];
      check(x, {~z[63], z[62:0]}, ref_op(x, {~z[63], z[62:0]}));
    end
    // specials
    check(64'h0, 64'h3FF0_0000_0000_0000, ref_op(64'h0, 64'h3FF0_0000_0000_0000));
    check(64'h7FF0_0000_0000_0000, 64'h3FF0_0000_0000_0000, ref_op(64'h7FF0_0000_0000_0000, 64'h3FF0_0000_0000_0000));
    check(64'h3FC9_9999_9999_999A, 64'h4000_0000_0000_0000, ref_op(64'h3FC9_9999_9999_999A, 64'h4000_0000_0000_0000));
    check(64'h7FF8_0000_0000_0000, 64'h3FF0_0000_0000_0000, 64'h7FF8_0000_0000_0000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
