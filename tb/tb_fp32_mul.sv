// tb_fp32_mul: self-checking test of the FP32 multiplier.
// Random operands with exponents kept well inside the normal range, plus
// zeros, infinities and NaN. The reference is computed in double precision
// from the decoded operands; the result must be within half an FP32 unit in
// the last place (relative error below 2^-23.9).
module tb_fp32_mul;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [31:0] a, b, y;

  fp32_mul dut (.a, .b, .y);

  function automatic real f2r(logic [31:0] v);
    real m;
    if (v[30:23] == 0) return 0.0;
    m = 1.0 + real'(v[22:0]) / 8388608.0;
    for (int i = 127; i < int'(v[30:23]); i++) m = m * 2.0;
    for (int i = int'(v[30:23]); i < 127; i++) m = m / 2.0;
    return v[31] ? -m : m;
  endfunction

  function automatic logic [31:0] rnd_fp();
    logic [31:0] v;
    v = $urandom;
    v[30:23] = 8'(100 + ($urandom % 55));
    return v;
  endfunction

  task automatic check_num();
    real r, g, e;
    #1;
    r = f2r(a) * f2r(b);
    g = f2r(y);
    e = (r == 0.0) ? g : (g - r) / r;
    if (e < 0) e = -e;
    checks++;
    if (e > 6.0e-8) begin
      failures++;
      $display("FAIL mul %h * %h = %h (ref %g, got %g)", a, b, y, r, g);
    end
  endtask

  initial begin
    repeat (20000) begin
      @(posedge clk);
      a = rnd_fp(); b = rnd_fp();
      check_num();
    end
    // exact small cases
    a = 32'h3FC0_0000; b = 32'h4000_0000; #1; checks++;   // 1.5*2 = 3
    if (y !== 32'h4040_0000) begin failures++; $display("FAIL 1.5*2 %h", y); end
    a = 32'h0000_0000; b = 32'hC2F6_0000; #1; checks++;   // 0 * -123
    if (y[30:0] !== 31'd0 || y[31] !== 1'b1) begin failures++; $display("FAIL 0*x %h", y); end
    a = 32'h7F80_0000; b = 32'h3F80_0000; #1; checks++;   // inf * 1
    if (y !== 32'h7F80_0000) begin failures++; $display("FAIL inf %h", y); end
    a = 32'h7F80_0000; b = 32'h0000_0000; #1; checks++;   // inf * 0 = NaN
    if (y !== 32'h7FC0_0000) begin failures++; $display("FAIL nan %h", y); end
    a = 32'h7F00_0000; b = 32'h7F00_0000; #1; checks++;   // overflow
    if (y !== 32'h7F80_0000) begin failures++; $display("FAIL ovf %h", y); end
    a = 32'h0100_0000; b = 32'h0100_0000; #1; checks++;   // underflow
    if (y !== 32'h0000_0000) begin failures++; $display("FAIL unf %h", y); end
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
