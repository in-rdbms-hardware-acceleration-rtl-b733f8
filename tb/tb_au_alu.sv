// tb_au_alu: self-checking test of the analytic-unit ALU. For every
// operation it applies random Q16.16 operands (plus edge cases: zero,
// negative, divide by zero) and compares with a reference computed here in
// 64-bit integers (add, sub, mul, div, compare, sqrt, mov) or real numbers
// (sigmoid and gaussian, against the exact functions with the accuracy of
// the approximations: 0.02 absolute).
module tb_au_alu;
  import dana_pkg::*;
  aop_e op;
  word_t a, b, y;
  int checks = 0, failures = 0;

  au_alu dut (.*);
  initial begin #1000000; $display("TB_RESULT checks=%0d failures=%0d (watchdog)", checks, failures + 1); $finish; end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic real toreal(input word_t v);
    return real'(v) / 65536.0;
  endfunction

  function automatic real fabs(input real v);
    return (v < 0.0) ? -v : v;
  endfunction

  function automatic word_t rnd_small();   // |value| < 8
    return word_t'($signed($urandom) >>> 12);
  endfunction

  initial begin
    for (int k = 0; k < 4000; k++) begin
      automatic longint la, lb, e;
      a = (k % 3 == 0) ? word_t'($urandom) : rnd_small();
      b = (k % 5 == 0) ? '0 : rnd_small();
      la = longint'(a); lb = longint'(b);

      op = OP_ADD; #1; check(y == word_t'(la + lb), "add");
      op = OP_SUB; #1; check(y == word_t'(la - lb), "sub");
      op = OP_MUL; #1; e = (la * lb) >>> 16; check(y == word_t'(e), $sformatf("mul %h*%h=%h", a, b, y));
      op = OP_DIV; #1;
      if (b == 0) check(y == ((a < 0) ? word_t'(32'sh8000_0000) : word_t'(32'sh7FFF_FFFF)), "div by 0");
      else begin e = (la <<< 16) / lb; check(y == word_t'(e), $sformatf("div %h/%h=%h", a, b, y)); end
      op = OP_GT; #1; check(y == ((a > b) ? 32'sh10000 : 0), "gt");
      op = OP_LT; #1; check(y == ((a < b) ? 32'sh10000 : 0), "lt");
      op = OP_MOV; #1; check(y == a, "mov");
      op = OP_SQRT; #1;
      if (a <= 0) check(y == 0, "sqrt of non-positive");
      else begin
        automatic longint v = la <<< 16, r = longint'(y);
        check(r * r <= v && (r + 1) * (r + 1) > v, $sformatf("sqrt %h -> %h", a, y));
      end
      a = rnd_small();
      op = OP_SIGM; #1;
      check(fabs(toreal(y) - 1.0 / (1.0 + $exp(-toreal(a)))) < 0.02, $sformatf("sigmoid %f -> %f", toreal(a), toreal(y)));
      op = OP_GAUS; #1;
      check(fabs(toreal(y) - $exp(-toreal(a) * toreal(a))) < 0.02, $sformatf("gauss %f -> %f", toreal(a), toreal(y)));
      op = OP_NOP; #1; check(y == 0, "nop gives 0");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
