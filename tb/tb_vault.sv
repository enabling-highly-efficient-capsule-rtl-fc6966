// tb_vault: one vault (16 PEs) with the DRAM bank model.
// Every PE gets a short program through the vault's command port: three
// immediates, a MAC, a MUL, an ADD, then a STORE of the three results and
// a LOAD/STORE copy of a block the testbench placed in DRAM. All sixteen PEs
// run at once, so their memory requests meet in the sub-memory controller.
// The testbench waits for `busy` to fall and checks every stored block in
// the bank model against results computed in double precision; it also
// requires that queued-request conflicts (q_len > 0) occurred.
module tb_vault;
  import pim_pkg::*;
  localparam int NPE = 16, NBANK = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, conflicts = 0;

  logic      cmd_valid, cmd_ready;
  host_cmd_t cmd;
  logic      rin_valid, rin_ready, rin_rsp_valid, rin_rsp_ready;
  mem_req_t  rin_req;
  mem_rsp_t  rin_rsp;
  logic      rout_valid, rout_ready, rout_rsp_valid;
  mem_req_t  rout_req;
  mem_rsp_t  rout_rsp;
  logic      bank_req_valid [1][NBANK], bank_rsp_valid [1][NBANK], bank_ready [1][NBANK];
  bank_req_t bank_req [1][NBANK];
  bank_rsp_t bank_rsp [1][NBANK];
  logic [5:0] q_len;
  logic      busy;

  vault dut (
    .clk, .rst_n, .vault_id(5'd1), .host_prio(1'b0), .cmd_valid, .cmd_ready, .cmd,
    .rin_valid, .rin_ready, .rin_req, .rin_rsp_valid, .rin_rsp_ready, .rin_rsp,
    .rout_valid, .rout_ready, .rout_req, .rout_rsp_valid, .rout_rsp,
    .bank_ready(bank_ready[0]), .bank_req_valid(bank_req_valid[0]), .bank_req(bank_req[0]),
    .bank_rsp_valid(bank_rsp_valid[0]), .bank_rsp(bank_rsp[0]), .q_len, .busy);

  hmc_dram_model #(.NV(1), .NBANK(NBANK), .LAT(4)) u_dram (.*);

  always @(posedge clk) if (q_len > 0) conflicts++;

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
    v[30:23] = 8'(120 + ($urandom % 14));
    return v;
  endfunction

  // 16-byte sub-pages: raw block index b -> bank b[3:0], bank block b[23:4]
  function automatic logic [33:0] mkaddr(int blk);
    return {1'b0, 5'd1, 24'(blk), 4'd0};
  endfunction

  task automatic send(int pe, pe_op_e op, int dst, int a, int b, int c,
                      logic [33:0] addr, logic [31:0] imm);
    @(negedge clk);
    cmd_valid = 1;
    cmd.vault = 5'd1; cmd.pe = 4'(pe);
    cmd.cmd = '{op: op, dst: 5'(dst), a: 5'(a), b: 5'(b), c: 5'(c), addr: addr, imm: imm};
    @(posedge clk); while (!cmd_ready) @(posedge clk);
    @(negedge clk); cmd_valid = 0;
  endtask

  task automatic check_rel(string what, real r, logic [31:0] g, real tol);
    real e;
    e = (r == 0.0) ? f2r(g) : (f2r(g) - r) / r;
    if (e < 0) e = -e;
    checks++;
    if (e > tol) begin failures++; $display("FAIL %s ref %g got %g", what, r, f2r(g)); end
  endtask

  logic [31:0] xa [NPE], xb [NPE], xc [NPE];
  logic [127:0] src_blk [NPE];

  initial begin
    logic [127:0] blk;
    cmd_valid = 0; cmd = '0;
    rin_valid = 0; rin_req = '0; rin_rsp_ready = 1; rout_ready = 1;
    rout_rsp_valid = 0; rout_rsp = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int p = 0; p < NPE; p++) begin
      xa[p] = rnd_fp(); xb[p] = rnd_fp(); xc[p] = rnd_fp();
      src_blk[p] = {$urandom, $urandom, $urandom, $urandom};
      // all source blocks in bank 3, so the loads conflict
      u_dram.poke(0, 3, 20'(100 + p), src_blk[p]);
    end
    for (int p = 0; p < NPE; p++) begin
      send(p, PE_SETI, 0, 0, 0, 0, '0, xa[p]);
      send(p, PE_SETI, 1, 0, 0, 0, '0, xb[p]);
      send(p, PE_SETI, 2, 0, 0, 0, '0, xc[p]);
    end
    for (int p = 0; p < NPE; p++) begin
      send(p, PE_MAC, 4, 0, 1, 2, '0, 0);
      send(p, PE_MUL, 5, 0, 1, 0, '0, 0);
      send(p, PE_ADD, 6, 0, 1, 0, '0, 0);
    end
    for (int p = 0; p < NPE; p++) send(p, PE_LOAD, 8, 0, 0, 0, mkaddr(16 * (100 + p) + 3), 0);
    for (int p = 0; p < NPE; p++) send(p, PE_STORE, 0, 4, 0, 0, mkaddr(16 * (200 + p) + p), 0);
    for (int p = 0; p < NPE; p++) send(p, PE_STORE, 0, 8, 0, 0, mkaddr(16 * (300 + p) + 7), 0);
    @(negedge clk);
    while (busy) @(negedge clk);
    repeat (10) @(negedge clk);
    for (int p = 0; p < NPE; p++) begin
      blk = u_dram.peek(0, p, 20'(200 + p));
      check_rel("mac", f2r(xa[p]) * f2r(xb[p]) + f2r(xc[p]), blk[31:0], 1.0e-6);
      check_rel("mul", f2r(xa[p]) * f2r(xb[p]), blk[63:32], 1.0e-7);
      check_rel("add", f2r(xa[p]) + f2r(xb[p]), blk[95:64], 1.0e-6);
      blk = u_dram.peek(0, 7, 20'(300 + p));
      checks++;
      if (blk !== src_blk[p]) begin failures++; $display("FAIL copy pe %0d", p); end
    end
    checks++;
    if (conflicts == 0) begin failures++; $display("FAIL no bank conflict seen"); end
    $display("conflict cycles %0d", conflicts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
