// tb_alu_fpu: self-checking test of the PE's ALU/FPU.
//
// Random doubles with exponents kept well inside the normal range are
// added, subtracted and multiplied, and each result is compared bit for bit
// with the simulator's own IEEE-754 double arithmetic (round to nearest
// even). Cancellation cases (equal exponents, opposite signs), exact ties,
// zeros, infinities and NaNs are checked as directed cases, and the integer
// and logic operations against SystemVerilog expressions.
module tb_alu_fpu;
  import grape_pkg::*;

  alu_op_e op;
  word_t   a, b, y;
  int      checks = 0, failures = 0;

  alu_fpu dut (.op(op), .a(a), .b(b), .y(y));

  function automatic word_t rnd_double(int unsigned espan);
    logic [10:0] e;
    e = 11'(1023 - espan + ($urandom % (2 * espan + 1)));
    return {1'($urandom), e, 20'($urandom), 32'($urandom)};
  endfunction

  task automatic check(alu_op_e o, word_t x, word_t z, word_t exp_y, string what);
    op = o; a = x; b = z;
    #1;
    checks++;
    if (y !== exp_y) begin
      failures++;
      if (failures < 10)
        $display("FAIL %s op=%s a=%h b=%h y=%h expected %h", what, o.name(), x, z, y, exp_y);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    word_t x, z;
    for (int i = 0; i < 20000; i++) begin
      x = rnd_double((i % 3 == 0) ? 2 : 200);
      z = rnd_double((i % 3 == 0) ? 2 : 200);
      if (i % 7 == 0) z = {~x[63], x[62:52], 20'($urandom), 32'($urandom)};  // cancellation
      check(OP_FADD, x, z, $realtobits($bitstoreal(x) + $bitstoreal(z)), "fadd");
      check(OP_FSUB, x, z, $realtobits($bitstoreal(x) - $bitstoreal(z)), "fsub");
      check(OP_FMUL, x, z, $realtobits($bitstoreal(x) * $bitstoreal(z)), "fmul");
    end
    // Directed floating-point cases.
    check(OP_FADD, $realtobits(1.0), $realtobits(-1.0), 64'h0, "x-x=+0");
    check(OP_FADD, $realtobits(1.0), $realtobits(2.0**-53), $realtobits(1.0), "tie to even down");
    check(OP_FADD, $realtobits(1.0 + 2.0**-52), $realtobits(2.0**-53), $realtobits(1.0 + 2.0**-51), "tie to even up");
    check(OP_FADD, $realtobits(3.5), 64'h0, $realtobits(3.5), "x+0");
    check(OP_FMUL, $realtobits(3.5), 64'h8000_0000_0000_0000, 64'h8000_0000_0000_0000, "x*-0");
    check(OP_FMUL, $realtobits(2.0**1000), $realtobits(2.0**1000), 64'h7FF0_0000_0000_0000, "overflow");
    check(OP_FADD, 64'h7FF0_0000_0000_0000, 64'hFFF0_0000_0000_0000, QNAN, "inf-inf");
    check(OP_FMUL, 64'h7FF0_0000_0000_0000, 64'h0, QNAN, "inf*0");
    check(OP_FADD, 64'h7FF0_0000_0000_0000, $realtobits(5.0), 64'h7FF0_0000_0000_0000, "inf+x");
    check(OP_FSUB, $realtobits(1.5), $realtobits(1.5), 64'h0, "fsub equal");
    // Integer and logic operations.
    for (int i = 0; i < 2000; i++) begin
      x = {$urandom, $urandom};
      z = {$urandom, $urandom};
      check(OP_IADD, x, z, x + z, "iadd");
      check(OP_ISUB, x, z, x - z, "isub");
      check(OP_AND,  x, z, x & z, "and");
      check(OP_OR,   x, z, x | z, "or");
      check(OP_XOR,  x, z, x ^ z, "xor");
      check(OP_MOV,  x, z, x,     "mov");
      check(OP_MOVB, x, z, z,     "movb");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
