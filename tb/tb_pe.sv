// tb_pe: end-to-end test of one processing element.
// A small memory model in the testbench answers LOAD and STORE requests a
// few cycles late. The test loads vectors, runs every arithmetic command on
// random operands, stores results back and checks them against double
// precision references: MAC/MUL/ADD/SUB within FP32 rounding, RSQRT within
// 0.2 % (seed plus one Newton step), RECIP within 0.05 % (two Newton steps),
// EXP within 6.5 % (the shift approximation). It also checks that each
// arithmetic command keeps the PE busy exactly for its program length.
module tb_pe;
  import pim_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic     cmd_valid, cmd_ready, mreq_valid, mreq_ready, mrsp_valid, busy;
  pe_cmd_t  cmd;
  mem_req_t mreq;
  mem_rsp_t mrsp;

  pe dut (.clk, .rst_n, .vault_id(5'd3), .pe_id(5'd7), .cmd_valid, .cmd_ready,
          .cmd, .mreq_valid, .mreq_ready, .mreq, .mrsp_valid, .mrsp, .busy);

  // ---- memory model: 3-cycle response ------------------------------------
  logic [127:0] mem [logic [29:0]];
  int lat;
  mem_req_t pend;
  assign mreq_ready = 1'b1;
  always @(posedge clk) begin
    mrsp_valid <= 1'b0;
    if (mreq_valid && mreq_ready) begin
      pend <= mreq; lat <= 3;
      if (mreq.tag.vault != 5'd3 || mreq.tag.src != 5'd7) begin
        failures++; $display("FAIL tag");
      end
    end else if (lat > 0) begin
      lat <= lat - 1;
      if (lat == 1) begin
        mrsp_valid <= 1'b1;
        mrsp.tag   <= pend.tag;
        if (pend.we) mem[pend.addr[33:4]] = pend.wdata;
        mrsp.rdata <= mem.exists(pend.addr[33:4]) ? mem[pend.addr[33:4]] : '0;
      end
    end
  end

  function automatic real f2r(logic [31:0] v);
    real m;
    if (v[30:23] == 0) return 0.0;
    m = 1.0 + real'(v[22:0]) / 8388608.0;
    for (int i = 127; i < int'(v[30:23]); i++) m = m * 2.0;
    for (int i = int'(v[30:23]); i < 127; i++) m = m / 2.0;
    return v[31] ? -m : m;
  endfunction

  // double -> FP32 by truncation (normal range only)
  function automatic logic [31:0] r2f(real v);
    logic [63:0] d;
    d = $realtobits(v);
    if (d[62:52] == 0) return 32'd0;
    return {d[63], 8'(int'(d[62:52]) - 1023 + 127), d[51:29]};
  endfunction

  function automatic logic [31:0] rnd_fp(int base, int span, bit pos);
    logic [31:0] v;
    v = $urandom;
    v[30:23] = 8'(base + ($urandom % span));
    if (pos) v[31] = 1'b0;
    return v;
  endfunction

  task automatic issue(pe_cmd_t c, output int cycles);
    @(negedge clk);
    cmd = c; cmd_valid = 1;
    @(posedge clk);
    while (!cmd_ready) @(posedge clk);
    @(negedge clk);
    cmd_valid = 0;
    cycles = 0;
    while (busy) begin @(negedge clk); cycles++; end
  endtask

  function automatic pe_cmd_t mk(pe_op_e op, int dst, int a, int b, int c,
                                 logic [33:0] addr, logic [31:0] imm);
    pe_cmd_t k;
    k.op = op; k.dst = 5'(dst); k.a = 5'(a); k.b = 5'(b); k.c = 5'(c);
    k.addr = addr; k.imm = imm;
    return k;
  endfunction

  task automatic check_rel(string what, real r, logic [31:0] g, real tol);
    real e;
    e = (r == 0.0) ? f2r(g) : (f2r(g) - r) / r;
    if (e < 0) e = -e;
    checks++;
    if (e > tol) begin
      failures++;
      $display("FAIL %s ref %g got %g (%h) err %g", what, r, f2r(g), g, e);
    end
  endtask

  // reads data buffer entries through a STORE to a scratch block
  task automatic readback(int a, output logic [127:0] blk);
    int cy;
    issue(mk(PE_STORE, 0, a, 0, 0, 34'h3_0000_0F00, 0), cy);
    blk = mem[30'h3000_00F0];
  endtask

  initial begin
    logic [31:0] x, y, z;
    logic [127:0] blk;
    int cy;
    real r;
    cmd_valid = 0; cmd = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    for (int it = 0; it < 300; it++) begin
      x = rnd_fp(110, 30, 0); y = rnd_fp(110, 30, 0); z = rnd_fp(120, 20, 0);
      mem[30'h0000_0010] = {32'd0, z, y, x};
      issue(mk(PE_LOAD, 4, 0, 0, 0, 34'h0_0000_0100, 0), cy);      // db4..7
      issue(mk(PE_MAC, 8, 4, 5, 6, 0, 0), cy);
      checks++; if (cy != 1) begin failures++; $display("FAIL MAC cycles %0d", cy); end
      issue(mk(PE_MUL, 9, 4, 5, 0, 0, 0), cy);
      issue(mk(PE_ADD, 10, 4, 5, 0, 0, 0), cy);
      issue(mk(PE_SUB, 11, 4, 5, 0, 0, 0), cy);
      readback(8, blk);
      check_rel("mac", f2r(x) * f2r(y) + f2r(z), blk[31:0], 1.2e-6);
      check_rel("mul", f2r(x) * f2r(y), blk[63:32], 6.0e-8);
      check_rel("add", f2r(x) + f2r(y), blk[95:64], 1.0e-5);
      check_rel("sub", f2r(x) - f2r(y), blk[127:96], 1.0e-5);

      x = rnd_fp(100, 50, 1);
      y = rnd_fp(100, 50, 1);
      issue(mk(PE_SETI, 12, 0, 0, 0, 0, x), cy);
      issue(mk(PE_SETI, 13, 0, 0, 0, 0, y), cy);
      issue(mk(PE_RSQRT, 16, 12, 0, 0, 0, 0), cy);
      checks++; if (cy != 6) begin failures++; $display("FAIL RSQRT cycles %0d", cy); end
      issue(mk(PE_RECIP, 17, 13, 0, 0, 0, 0), cy);
      checks++; if (cy != 5) begin failures++; $display("FAIL RECIP cycles %0d", cy); end
      // exponential argument in [-10, 10)
      r = (real'($urandom % 20000) - 10000.0) / 1000.0;
      z = r2f(r);
      issue(mk(PE_SETI, 14, 0, 0, 0, 0, z), cy);
      issue(mk(PE_EXP, 18, 14, 0, 0, 0, 0), cy);
      checks++; if (cy != 3) begin failures++; $display("FAIL EXP cycles %0d", cy); end
      readback(16, blk);
      check_rel("rsqrt", 1.0 / $sqrt(f2r(x)), blk[31:0], 2.0e-3);
      check_rel("recip", 1.0 / f2r(y), blk[63:32], 5.0e-4);
      check_rel("exp", $exp(f2r(z)), blk[95:64], 6.5e-2);
    end
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
