// tb_pe_shifter: self-checking test of the PE bit shifter.
// SH_R1 is checked bit-exactly. SH_BS must return the integer floor(t*2^23)
// for positive t below 255, computed here from the decoded value of t in
// double precision, +0 for t <= 0 and +infinity beyond.
module tb_pe_shifter;
  import pim_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [31:0] x, y;
  sh_mode_e mode;

  pe_shifter dut (.x, .mode, .y);

  function automatic real f2r(logic [31:0] v);
    real m;
    if (v[30:23] == 0) return 0.0;
    m = 1.0 + real'(v[22:0]) / 8388608.0;
    for (int i = 127; i < int'(v[30:23]); i++) m = m * 2.0;
    for (int i = int'(v[30:23]); i < 127; i++) m = m / 2.0;
    return v[31] ? -m : m;
  endfunction

  initial begin
    real t;
    longint unsigned ref_v;
    repeat (5000) begin
      @(posedge clk);
      mode = SH_R1; x = $urandom; #1; checks++;
      if (y !== (x >> 1)) begin failures++; $display("FAIL r1 %h %h", x, y); end
    end
    repeat (20000) begin
      @(posedge clk);
      mode = SH_BS;
      x = $urandom;
      x[31] = 1'b0;
      x[30:23] = 8'(110 + ($urandom % 24));    // t from 2^-17 to 2^7
      #1;
      t = f2r(x);
      ref_v = longint'($floor(t * 8388608.0));
      checks++;
      if (ref_v >= 64'h7F80_0000) begin
        if (y !== 32'h7F80_0000) begin failures++; $display("FAIL sat %h %h", x, y); end
      end else if (64'(y) !== ref_v) begin
        failures++; $display("FAIL bs %h -> %h (ref %h)", x, y, ref_v);
      end
    end
    mode = SH_BS;
    x = 32'hC000_0000; #1; checks++;                 // -2 -> 0
    if (y !== 32'd0) begin failures++; $display("FAIL neg"); end
    x = 32'h437F_8000; #1; checks++;                 // 255.5 -> inf
    if (y !== 32'h7F80_0000) begin failures++; $display("FAIL inf %h", y); end
    x = 32'h42FE_0000; #1; checks++;                 // 127.0 -> 1.0f
    if (y !== 32'h3F80_0000) begin failures++; $display("FAIL one %h", y); end
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
