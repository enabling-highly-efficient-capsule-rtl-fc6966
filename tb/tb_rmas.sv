// tb_rmas: checks the RMAS decision against a floating-point evaluation of
// the overhead model. For random queue lengths, target masks and weights the
// testbench evaluates kappa(n) = gamma_v*n*Qbar + gamma_h*n_max/n in double
// precision, takes n_ref = round(sqrt(n_max*gamma_h/(Qbar*gamma_v)))
// clamped to [0, n_max], and checks n_h and that exactly the n_h target
// vaults with the shortest queues get priority, one cycle later.
module tb_rmas;
  localparam int NV = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [5:0]    q_len [NV];
  logic [NV-1:0] host_target, host_prio;
  logic [3:0]    gamma_v, gamma_h;
  logic [6:0]    n_h;
  int hit_partial = 0, hit_all = 0, hit_none = 0;

  rmas #(.NV(NV)) dut (.clk, .rst_n, .q_len, .host_target, .gamma_v, .gamma_h,
                       .host_prio, .n_h);

  initial begin
    int nmax, sumq, nref, cnt;
    real qbar, r;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (5000) begin
      @(negedge clk);
      host_target = NV'($urandom);
      gamma_v = 4'(1 + $urandom % 15);
      gamma_h = 4'($urandom % 16);
      for (int v = 0; v < NV; v++) q_len[v] = 6'($urandom % 17);
      nmax = 0; sumq = 0;
      for (int v = 0; v < NV; v++) if (host_target[v]) begin nmax++; sumq += q_len[v]; end
      if (sumq == 0) nref = nmax;
      else begin
        qbar = real'(sumq) / real'(nmax);
        r = $sqrt(real'(nmax) * real'(gamma_h) / (qbar * real'(gamma_v)));
        nref = int'($floor(r + 0.5));
        if (nref > nmax) nref = nmax;
      end
      @(negedge clk);
      checks++;
      if (int'(n_h) != nref) begin
        failures++; $display("FAIL n_h %0d ref %0d (nmax %0d sumq %0d gv %0d gh %0d)",
                             n_h, nref, nmax, sumq, gamma_v, gamma_h);
      end
      if (nref > 0 && nref < nmax) hit_partial++;
      if (nref == nmax && nmax > 0) hit_all++;
      if (nref == 0 && nmax > 0) hit_none++;
      // the chosen vaults are targets with the shortest queues
      cnt = 0;
      for (int v = 0; v < NV; v++) if (host_prio[v]) cnt++;
      checks++;
      if (cnt != nref) begin failures++; $display("FAIL prio count %0d", cnt); end
      for (int v = 0; v < NV; v++)
        for (int u = 0; u < NV; u++)
          if (host_prio[v] && host_target[u] && !host_prio[u]) begin
            checks++;
            if (!host_target[v] || q_len[u] < q_len[v]) begin
              failures++; $display("FAIL choice %0d over %0d", v, u);
            end
          end
    end
    checks++;
    if (hit_partial == 0 || hit_all == 0 || hit_none == 0) begin
      failures++; $display("FAIL coverage %0d %0d %0d", hit_partial, hit_all, hit_none);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
