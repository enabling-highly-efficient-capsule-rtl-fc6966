// tb_pim_capsnet_top: the whole logic layer running a small dynamic-routing
// procedure end to end, at the top's default size (2 vaults of 16 PEs).
//
// Workload: NB = 4 input sets (batch), NL = 4 low-level capsules of 4
// values, NH = 2 high-level capsules of 4 values, ITER = 3 routing
// iterations. The work is split along the batch dimension: vault v holds
// input sets 2v and 2v+1, and PE (lb*NH + j) of that vault works on input
// set 2v+lb and high-level capsule j. The testbench acts as host and
// compiler:
//   1. the host writes u and W into the cube through the host link
//      (W with a 64-byte sub-page indicator so one PE's four W blocks sit
//      in one bank, u with 16-byte sub-pages);
//   2. each worker computes its prediction vectors u_hat = u x W (MAC);
//   3. per iteration: PE 15 of vault 0 computes c = softmax(b) (EXP, ADD,
//      RECIP, MUL) and stores it in vault 0; workers fetch c (vault 1 over
//      the crossbar), form s_j (MAC) and v_j = squash(s_j) (MAC, ADD,
//      SUB, RECIP, RSQRT, MUL); then the agreement v.u_hat, pre-aggregated over
//      the two input sets inside each vault, and summed into b in vault 0
//      by vault 0's workers reading both vaults' partial sums.
// Phases are separated by waiting for every vault to go idle. Meanwhile a
// host thread keeps reading vaults 0 and 1 so that RMAS has to split
// priority between host and PEs. The host finally reads v back; it is
// compared with a double-precision model of the same procedure that uses
// the same exponential approximation (other functions exact), within 1 %
// of the largest |v|. Mechanism counters (bank conflicts, crossbar traffic,
// RMAS decisions, each PE operation, both sub-page sizes) must all be
// non-zero.
module tb_pim_capsnet_top;
  import pim_pkg::*;
  localparam int NV = 2, NBANK = 16;
  localparam int NB = 4, NL = 4, NH = 2, ITER = 3, NVU = 2;
  // regions (bits 23:16 of the block field)
  localparam int R_U = 1, R_W = 2, R_PRE = 3, R_B = 4, R_C = 5, R_V = 6, R_D = 7;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle++;

  logic      cmd_valid, cmd_ready, hreq_valid, hreq_ready, hrsp_valid;
  host_cmd_t cmd;
  mem_req_t  hreq;
  mem_rsp_t  hrsp;
  logic [NV-1:0] host_target, host_prio, vault_busy;
  logic [3:0] gamma_v, gamma_h;
  logic [6:0] n_h;
  logic      bank_ready [NV][NBANK], bank_req_valid [NV][NBANK], bank_rsp_valid [NV][NBANK];
  bank_req_t bank_req [NV][NBANK];
  bank_rsp_t bank_rsp [NV][NBANK];
  logic [5:0] q_len [NV];

  pim_capsnet_top dut (.*);
  hmc_dram_model #(.NV(NV), .NBANK(NBANK), .LAT(4)) u_dram (
    .clk, .bank_ready, .bank_req_valid, .bank_req, .bank_rsp_valid, .bank_rsp);

  // ---- mechanism counters ---------------------------------------------------
  int n_conflict = 0, n_remote = 0, n_host = 0, n_rmas_part = 0, n_rmas_all = 0;
  int n_op [16];
  int n_ind0 = 0, n_ind2 = 0;
  initial for (int i = 0; i < 16; i++) n_op[i] = 0;
  always @(posedge clk) if (rst_n) begin
    int tgt, pr;
    for (int v = 0; v < NV; v++) begin
      if (q_len[v] > 0) n_conflict++;
      if (dut.s_req_valid[v] && dut.s_req_ready[v]) n_remote++;
    end
    if (hreq_valid && hreq_ready) n_host++;
    tgt = $countones(host_target); pr = $countones(host_prio);
    if (tgt > 0 && pr > 0 && pr < tgt) n_rmas_part++;
    if (tgt > 0 && pr == tgt) n_rmas_all++;
    if (cmd_valid && cmd_ready) begin
      n_op[int'(cmd.cmd.op)]++;
      if (cmd.cmd.op inside {PE_LOAD, PE_STORE}) begin
        if (cmd.cmd.addr[3:1] == 3'd0) n_ind0++;
        if (cmd.cmd.addr[3:1] == 3'd2) n_ind2++;
      end
    end
  end

  // ---- helpers ----------------------------------------------------------------
  function automatic real f2r(logic [31:0] v);
    real m;
    if (v[30:23] == 0) return 0.0;
    m = 1.0 + real'(v[22:0]) / 8388608.0;
    for (int i = 127; i < int'(v[30:23]); i++) m = m * 2.0;
    for (int i = int'(v[30:23]); i < 127; i++) m = m / 2.0;
    return v[31] ? -m : m;
  endfunction

  function automatic logic [31:0] r2f(real v);
    logic [63:0] d;
    d = $realtobits(v);
    if (d[62:52] == 0) return 32'd0;
    return {d[63], 8'(int'(d[62:52]) - 1023 + 127), d[51:29]};
  endfunction

  // exponential as the PE approximates it (BS shift of log2e*x + Avg + 126)
  function automatic real exp_model(real x);
    real t, fl, r;
    t = x * 1.4426950408889634 + 127.0 - 0.05730495911103661;
    fl = $floor(t);
    r = 1.0 + (t - fl);
    for (int i = 127; i < int'(fl); i++) r = r * 2.0;
    for (int i = int'(fl); i < 127; i++) r = r / 2.0;
    return r * 1.0000574;
  endfunction

  function automatic logic [33:0] mkaddr(int v, int region, int blk, int ind);
    return {1'b0, 5'(v), 8'(region), 16'(blk), 3'(ind), 1'b0};
  endfunction

  task automatic send(int v, int pe, pe_op_e op, int dst, int a, int b, int c,
                      logic [33:0] addr, logic [31:0] imm);
    @(negedge clk);
    cmd_valid = 1;
    cmd.vault = 5'(v); cmd.pe = 4'(pe);
    cmd.cmd = '{op: op, dst: 5'(dst), a: 5'(a), b: 5'(b), c: 5'(c), addr: addr, imm: imm};
    @(posedge clk); while (!cmd_ready) @(posedge clk);
    @(negedge clk); cmd_valid = 0;
  endtask

  task automatic barrier();
    int quiet;
    quiet = 0;
    while (quiet < 8) begin
      @(negedge clk);
      if (vault_busy == '0) quiet++; else quiet = 0;
    end
  endtask

  semaphore hlink = new(1);
  task automatic host_access(logic we, logic [33:0] a, logic [127:0] d,
                             output logic [127:0] r);
    hlink.get(1);
    @(negedge clk);
    hreq_valid = 1;
    hreq = '{we: we, addr: a, wdata: d, tag: '{vault: 5'd0, src: SRC_HOST}};
    @(posedge clk); while (!hreq_ready) @(posedge clk);
    @(negedge clk); hreq_valid = 0;
    while (!hrsp_valid) @(negedge clk);
    r = hrsp.rdata;
    hlink.put(1);
  endtask

  // ---- data and reference -------------------------------------------------------
  real u [NB][NL][4];
  real w [NL][NH][4][4];     // w[i][j][d][c]: u_hat[c] = sum_d u[d]*w[d][c]
  real uh [NB][NL][NH][4];
  real bref [NL][NH], cref [NL][NH], vref [NB][NH][4];

  task automatic reference();
    real s [4], n, sc, e [NH], sum, a;
    for (int k = 0; k < NB; k++) for (int i = 0; i < NL; i++) for (int j = 0; j < NH; j++)
      for (int c = 0; c < 4; c++) begin
        uh[k][i][j][c] = 0;
        for (int d = 0; d < 4; d++) uh[k][i][j][c] += u[k][i][d] * w[i][j][d][c];
      end
    for (int i = 0; i < NL; i++) for (int j = 0; j < NH; j++) bref[i][j] = 0;
    for (int it = 0; it < ITER; it++) begin
      for (int i = 0; i < NL; i++) begin
        sum = 0;
        for (int j = 0; j < NH; j++) begin e[j] = exp_model(bref[i][j]); sum += e[j]; end
        for (int j = 0; j < NH; j++) cref[i][j] = e[j] / sum;
      end
      for (int k = 0; k < NB; k++) for (int j = 0; j < NH; j++) begin
        n = 0;
        for (int c = 0; c < 4; c++) begin
          s[c] = 0;
          for (int i = 0; i < NL; i++) s[c] += uh[k][i][j][c] * cref[i][j];
          n += s[c] * s[c];
        end
        sc = n / (1.0 + n) / $sqrt(n);
        for (int c = 0; c < 4; c++) vref[k][j][c] = s[c] * sc;
      end
      if (it != ITER - 1)
        for (int i = 0; i < NL; i++) for (int j = 0; j < NH; j++) begin
          a = 0;
          for (int k = 0; k < NB; k++) for (int c = 0; c < 4; c++) a += vref[k][j][c] * uh[k][i][j][c];
          bref[i][j] += a;
        end
    end
  endtask

  // ---- the routing program -----------------------------------------------------
  // worker data buffer: 0..3 u / v, 4..7 W column / scratch, 8..11 c,
  // 12..15 s, 16..31 u_hat[i][c]
  task automatic phase_uhat(int v, int lb, int j);
    int pe;
    pe = lb * NH + j;
    for (int i = 0; i < NL; i++) begin
      send(v, pe, PE_LOAD, 0, 0, 0, 0, mkaddr(v, R_U, lb * NL + i, 0), 0);
      for (int c = 0; c < 4; c++) begin
        send(v, pe, PE_LOAD, 4, 0, 0, 0, mkaddr(v, R_W, ((i * NH + j) * 4 + c), 2), 0);
        send(v, pe, PE_SETI, 16 + 4 * i + c, 0, 0, 0, '0, 32'd0);
        for (int d = 0; d < 4; d++)
          send(v, pe, PE_MAC, 16 + 4 * i + c, d, 4 + d, 16 + 4 * i + c, '0, 0);
      end
    end
  endtask

  task automatic phase_softmax();
    // vault 0, PE 15: b_0 in 0..3, b_1 in 4..7
    for (int j = 0; j < NH; j++)
      send(0, 15, PE_LOAD, 4 * j, 0, 0, 0, mkaddr(0, R_B, j, 0), 0);
    for (int i = 0; i < NL; i++) begin
      send(0, 15, PE_EXP, 8 + i, i, 0, 0, '0, 0);
      send(0, 15, PE_EXP, 12 + i, 4 + i, 0, 0, '0, 0);
      send(0, 15, PE_ADD, 16 + i, 8 + i, 12 + i, 0, '0, 0);
      send(0, 15, PE_RECIP, 20 + i, 16 + i, 0, 0, '0, 0);
      send(0, 15, PE_MUL, 24 + i, 8 + i, 20 + i, 0, '0, 0);
      send(0, 15, PE_MUL, 28 + i, 12 + i, 20 + i, 0, '0, 0);
    end
    send(0, 15, PE_STORE, 0, 24, 0, 0, mkaddr(0, R_C, 0, 0), 0);
    send(0, 15, PE_STORE, 0, 28, 0, 0, mkaddr(0, R_C, 1, 0), 0);
  endtask

  task automatic phase_s_squash(int v, int lb, int j);
    int pe;
    pe = lb * NH + j;
    send(v, pe, PE_LOAD, 8, 0, 0, 0, mkaddr(0, R_C, j, 0), 0);
    for (int c = 0; c < 4; c++) begin
      send(v, pe, PE_SETI, 12 + c, 0, 0, 0, '0, 32'd0);
      for (int i = 0; i < NL; i++)
        send(v, pe, PE_MAC, 12 + c, 16 + 4 * i + c, 8 + i, 12 + c, '0, 0);
    end
    send(v, pe, PE_SETI, 4, 0, 0, 0, '0, 32'd0);
    for (int c = 0; c < 4; c++) send(v, pe, PE_MAC, 4, 12 + c, 12 + c, 4, '0, 0);
    send(v, pe, PE_SETI, 5, 0, 0, 0, '0, 32'hBF80_0000);  // -1.0
    send(v, pe, PE_SUB, 6, 4, 5, 0, '0, 0);        // |s|^2 - (-1)
    send(v, pe, PE_RECIP, 7, 6, 0, 0, '0, 0);
    send(v, pe, PE_MUL, 5, 4, 7, 0, '0, 0);        // |s|^2 / (1 + |s|^2)
    send(v, pe, PE_RSQRT, 6, 4, 0, 0, '0, 0);      // 1 / |s|
    send(v, pe, PE_MUL, 5, 5, 6, 0, '0, 0);
    for (int c = 0; c < 4; c++) send(v, pe, PE_MUL, c, 12 + c, 5, 0, '0, 0);
    send(v, pe, PE_STORE, 0, 0, 0, 0, mkaddr(v, R_V, lb * NH + j, 0), 0);
  endtask

  task automatic phase_agree(int v, int lb, int j);
    int pe;
    pe = lb * NH + j;
    for (int i = 0; i < NL; i++) begin
      send(v, pe, PE_SETI, 4 + i, 0, 0, 0, '0, 32'd0);
      for (int c = 0; c < 4; c++)
        send(v, pe, PE_MAC, 4 + i, c, 16 + 4 * i + c, 4 + i, '0, 0);
    end
    if (lb == 1) send(v, pe, PE_STORE, 0, 4, 0, 0, mkaddr(v, R_PRE, 8 + j, 0), 0);
  endtask

  task automatic phase_preagg(int v, int j);
    send(v, j, PE_LOAD, 8, 0, 0, 0, mkaddr(v, R_PRE, 8 + j, 0), 0);
    for (int i = 0; i < NL; i++) send(v, j, PE_ADD, 4 + i, 4 + i, 8 + i, 0, '0, 0);
    send(v, j, PE_STORE, 0, 4, 0, 0, mkaddr(v, R_PRE, j, 0), 0);
  endtask

  task automatic phase_global(int j);
    send(0, j, PE_LOAD, 4, 0, 0, 0, mkaddr(0, R_B, j, 0), 0);
    for (int v = 0; v < NVU; v++) begin
      send(0, j, PE_LOAD, 8, 0, 0, 0, mkaddr(v, R_PRE, j, 0), 0);
      for (int i = 0; i < NL; i++) send(0, j, PE_ADD, 4 + i, 4 + i, 8 + i, 0, '0, 0);
    end
    send(0, j, PE_STORE, 0, 4, 0, 0, mkaddr(0, R_B, j, 0), 0);
  endtask

  // host traffic competing with the PEs
  bit host_bg = 0;
  initial begin
    logic [127:0] r;
    wait (rst_n);
    forever begin
      @(negedge clk);
      if (host_bg) host_access(0, mkaddr($urandom % NVU, R_D, $urandom % 64, 0), '0, r);
    end
  end

  initial begin
    logic [127:0] blk, r;
    real maxv, err;
    cmd_valid = 0; cmd = '0; hreq_valid = 0; hreq = '0;
    host_target = '0; gamma_v = 4'd8; gamma_h = 4'd4;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < NB; k++) for (int i = 0; i < NL; i++) for (int d = 0; d < 4; d++)
      u[k][i][d] = (real'($urandom % 2000) - 1000.0) / 1000.0;
    for (int i = 0; i < NL; i++) for (int j = 0; j < NH; j++)
      for (int d = 0; d < 4; d++) for (int c = 0; c < 4; c++)
        w[i][j][d][c] = (real'($urandom % 2000) - 1000.0) / 1000.0;
    // keep data as exact FP32 values
    for (int k = 0; k < NB; k++) for (int i = 0; i < NL; i++) for (int d = 0; d < 4; d++)
      u[k][i][d] = f2r(r2f(u[k][i][d]));
    for (int i = 0; i < NL; i++) for (int j = 0; j < NH; j++)
      for (int d = 0; d < 4; d++) for (int c = 0; c < 4; c++)
        w[i][j][d][c] = f2r(r2f(w[i][j][d][c]));
    reference();

    // 1. host writes u and W (W column c of (i,j) = w[i][j][*][c])
    host_target = NV'(3);
    for (int v = 0; v < NVU; v++) begin
      for (int lb = 0; lb < 2; lb++) for (int i = 0; i < NL; i++) begin
        for (int d = 0; d < 4; d++) blk[32 * d +: 32] = r2f(u[2 * v + lb][i][d]);
        host_access(1, mkaddr(v, R_U, lb * NL + i, 0), blk, r);
      end
      for (int i = 0; i < NL; i++) for (int j = 0; j < NH; j++) for (int c = 0; c < 4; c++) begin
        for (int d = 0; d < 4; d++) blk[32 * d +: 32] = r2f(w[i][j][d][c]);
        host_access(1, mkaddr(v, R_W, (i * NH + j) * 4 + c, 2), blk, r);
      end
    end

    // 2. prediction vectors, with host traffic in the background
    host_bg = 1;
    for (int v = 0; v < NVU; v++) for (int lb = 0; lb < 2; lb++) for (int j = 0; j < NH; j++)
      phase_uhat(v, lb, j);
    barrier();
    host_bg = 0;

    // 3. routing iterations
    for (int it = 0; it < ITER; it++) begin
      phase_softmax();
      barrier();
      for (int v = 0; v < NVU; v++) for (int lb = 0; lb < 2; lb++) for (int j = 0; j < NH; j++)
        phase_s_squash(v, lb, j);
      barrier();
      if (it != ITER - 1) begin
        for (int v = 0; v < NVU; v++) for (int lb = 0; lb < 2; lb++) for (int j = 0; j < NH; j++)
          phase_agree(v, lb, j);
        barrier();
        for (int v = 0; v < NVU; v++) for (int j = 0; j < NH; j++) phase_preagg(v, j);
        barrier();
        for (int j = 0; j < NH; j++) phase_global(j);
        barrier();
      end
    end

    // 4. host reads v
    maxv = 0;
    for (int k = 0; k < NB; k++) for (int j = 0; j < NH; j++) for (int c = 0; c < 4; c++)
      if ((vref[k][j][c] < 0 ? -vref[k][j][c] : vref[k][j][c]) > maxv)
        maxv = (vref[k][j][c] < 0 ? -vref[k][j][c] : vref[k][j][c]);
    for (int k = 0; k < NB; k++) for (int j = 0; j < NH; j++) begin
      host_access(0, mkaddr(k / 2, R_V, (k % 2) * NH + j, 0), '0, blk);
      for (int c = 0; c < 4; c++) begin
        err = f2r(blk[32 * c +: 32]) - vref[k][j][c];
        if (err < 0) err = -err;
        checks++;
        if (err > 0.01 * maxv) begin
          failures++;
          $display("FAIL v[%0d][%0d][%0d] = %g, reference %g", k, j, c,
                   f2r(blk[32 * c +: 32]), vref[k][j][c]);
        end
      end
    end

    $display("cycles %0d  conflicts %0d  crossbar %0d  host %0d  rmas part %0d all %0d",
             cycle, n_conflict, n_remote, n_host, n_rmas_part, n_rmas_all);
    $display("ops: load %0d store %0d seti %0d mac %0d mul %0d add %0d rsqrt %0d recip %0d exp %0d  ind0 %0d ind2 %0d",
             n_op[PE_LOAD], n_op[PE_STORE], n_op[PE_SETI], n_op[PE_MAC], n_op[PE_MUL],
             n_op[PE_ADD], n_op[PE_RSQRT], n_op[PE_RECIP], n_op[PE_EXP], n_ind0, n_ind2);
    checks++; if (n_conflict == 0)  begin failures++; $display("FAIL no bank conflict"); end
    checks++; if (n_remote == 0)    begin failures++; $display("FAIL no inter-vault traffic"); end
    checks++; if (n_host == 0)      begin failures++; $display("FAIL no host traffic"); end
    checks++; if (n_rmas_part == 0) begin failures++; $display("FAIL RMAS never split priority"); end
    checks++; if (n_rmas_all == 0)  begin failures++; $display("FAIL RMAS never gave all to host"); end
    checks++; if (n_ind0 == 0 || n_ind2 == 0) begin failures++; $display("FAIL sub-page sizes"); end
    for (int o = int'(PE_LOAD); o <= int'(PE_EXP); o++) begin
      checks++;
      if (n_op[o] == 0) begin failures++; $display("FAIL op %0d never used", o); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
