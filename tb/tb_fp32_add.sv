// tb_fp32_add: self-checking test of the FP32 adder in its three modes.
// FP modes are checked against a double-precision reference from the decoded
// operands (relative error below 2^-23.9 when the exact result is not tiny,
// absolute error against the larger operand otherwise, which covers
// cancellation); the integer mode is checked bit-exactly.
module tb_fp32_add;
  import pim_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [31:0] a, c, y;
  add_mode_e mode;

  fp32_add dut (.a, .c, .mode, .y);

  function automatic real f2r(logic [31:0] v);
    real m;
    if (v[30:23] == 0) return 0.0;
    m = 1.0 + real'(v[22:0]) / 8388608.0;
    for (int i = 127; i < int'(v[30:23]); i++) m = m * 2.0;
    for (int i = int'(v[30:23]); i < 127; i++) m = m / 2.0;
    return v[31] ? -m : m;
  endfunction

  function automatic logic [31:0] rnd_fp(int base);
    logic [31:0] v;
    v = $urandom;
    v[30:23] = 8'(base + ($urandom % 30));
    return v;
  endfunction

  task automatic check_num();
    real r, g, e, big;
    #1;
    r = (mode == ADD_F) ? f2r(c) + f2r(a) : f2r(c) - f2r(a);
    g = f2r(y);
    big = (f2r(a) < 0 ? -f2r(a) : f2r(a));
    if ((f2r(c) < 0 ? -f2r(c) : f2r(c)) > big) big = (f2r(c) < 0 ? -f2r(c) : f2r(c));
    e = g - r; if (e < 0) e = -e;
    if ((r < 0 ? -r : r) > big * 1.0e-6) e = e / (r < 0 ? -r : r);
    else e = e / big;
    checks++;
    if (e > 6.0e-8) begin
      failures++;
      $display("FAIL add mode %0d: %h , %h -> %h (ref %g, got %g)", mode, c, a, y, r, g);
    end
  endtask

  initial begin
    repeat (20000) begin
      @(posedge clk);
      mode = ($urandom % 2) ? ADD_F : ADD_FR;
      a = rnd_fp(110); c = rnd_fp(110);
      check_num();
    end
    // close operands: cancellation
    repeat (5000) begin
      @(posedge clk);
      mode = ADD_FR;
      c = rnd_fp(120); a = c ^ 32'($urandom % 64);
      check_num();
    end
    repeat (2000) begin
      @(posedge clk);
      mode = ADD_IR;
      a = $urandom; c = $urandom; #1;
      checks++;
      if (y !== c - a) begin failures++; $display("FAIL isub"); end
    end
    mode = ADD_F;
    a = 32'h3F80_0000; c = 32'h3F80_0000; #1; checks++;     // 1+1 = 2
    if (y !== 32'h4000_0000) begin failures++; $display("FAIL 1+1 %h", y); end
    a = 32'hBF80_0000; c = 32'h3F80_0000; #1; checks++;     // 1-1 = 0
    if (y !== 32'h0000_0000) begin failures++; $display("FAIL 1-1 %h", y); end
    a = 32'h7F80_0000; c = 32'h3F80_0000; #1; checks++;     // inf
    if (y !== 32'h7F80_0000) begin failures++; $display("FAIL inf %h", y); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
