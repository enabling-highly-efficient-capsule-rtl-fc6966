// tb_pe_op_controller: checks the unit flow of every PE program.
// For each operation the testbench pulses `start` and records, cycle by
// cycle, which units (1 = multiplier, 2 = adder, 3 = shifter) the emitted
// micro-operations enable, then compares that flow string and the step count
// with the flows written out below, and checks the first micro-operation of
// the exponential and inverse-square-root programs in detail.
module tb_pe_op_controller;
  import pim_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic   start;
  pe_op_e op;
  logic   uop_valid, busy;
  uop_t   uop;

  pe_op_controller dut (.clk, .rst_n, .start, .op, .uop_valid, .uop, .busy);

  task automatic run(pe_op_e o, string exp_flow);
    string flow;
    int n;
    flow = "";
    n = 0;
    @(negedge clk); start = 1; op = o;
    @(negedge clk); start = 0; op = PE_NOP;
    while (uop_valid && n < 20) begin
      if (n > 0) flow = {flow, ","};
      if (uop.mul_en) flow = {flow, "1"};
      if (uop.add_en) flow = {flow, "2"};
      if (uop.sh_en)  flow = {flow, "3"};
      if (o == PE_EXP && n == 0) begin
        checks++;
        if (uop.src_b != S_LOG2E || uop.src_c != S_BIAS) begin
          failures++; $display("FAIL exp step0 operands");
        end
      end
      if (o == PE_EXP && n == 1) begin
        checks++;
        if (uop.sh_mode != SH_BS || uop.src_c != S_AVGM1) begin
          failures++; $display("FAIL exp step1 mode");
        end
      end
      if (o == PE_RSQRT && n == 1) begin
        checks++;
        if (uop.add_mode != ADD_IR || uop.src_c != S_KRSQRT) begin
          failures++; $display("FAIL rsqrt seed");
        end
      end
      n++;
      @(negedge clk);
    end
    checks++;
    if (flow != exp_flow) begin
      failures++;
      $display("FAIL op %s flow %s expected %s", o.name(), flow, exp_flow);
    end
    checks++;
    if (busy) begin failures++; $display("FAIL busy after %s", o.name()); end
  endtask

  initial begin
    start = 0; op = PE_NOP;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(PE_MAC,   "12");
    run(PE_MUL,   "1");
    run(PE_ADD,   "2");
    run(PE_SUB,   "2");
    run(PE_RSQRT, "3,2,1,1,12,1");
    run(PE_RECIP, "2,12,1,12,1");
    run(PE_EXP,   "12,23,1");
    run(PE_MAC,   "12");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
