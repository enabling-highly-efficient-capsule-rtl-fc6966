// rmas: runtime memory access scheduler.
//
// When the host (GPU) and the vault PEs compete for the same vaults, RMAS
// decides in how many of the host's target vaults the host goes first. With
// the overhead model
//     kappa = gamma_v * n_h * Qbar + gamma_h * n_max / n_h
// (n_max: vaults the host's current operations target, Qbar: mean number of
// PE requests queued in those vaults, gamma_v/gamma_h: weights for the kind
// of operation running on each side) the best n_h is sqrt(n_max*gamma_h /
// (Qbar*gamma_v)), kept inside [0, n_max]. Here it is rounded to nearest in
// integer arithmetic: n_h is the largest n <= n_max with
//     (2n-1)^2 * sumQ * gamma_v <= 4 * n_max^2 * gamma_h,   sumQ = n_max*Qbar.
// With no PE request queued (or gamma_v = 0) every target vault goes to the
// host. The n_h target vaults with the shortest queues (ties: lower index)
// get `host_prio`. Inputs are sampled every cycle; outputs are registered,
// so a decision takes effect one cycle later.
// The formula and the shortest-queue choice are the paper's; the rounding,
// the integer form and the width of the weights are this design's.
module rmas #(
  parameter int unsigned NV = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [5:0]   q_len       [NV],  // PE requests queued per vault
  input  logic [NV-1:0] host_target,      // vaults the host's operations use
  input  logic [3:0]   gamma_v,
  input  logic [3:0]   gamma_h,
  output logic [NV-1:0] host_prio,
  output logic [6:0]   n_h
);
  logic [6:0]  n_max;
  logic [12:0] sum_q;
  logic [6:0]  nh;
  logic [NV-1:0] prio;

  always_comb begin
    longint unsigned lhs, rhs;
    int rank;
    lhs   = '0;
    rhs   = '0;
    rank  = 0;
    prio  = '0;
    n_max = '0;
    sum_q = '0;
    for (int v = 0; v < int'(NV); v++)
      if (host_target[v]) begin
        n_max = n_max + 7'd1;
        sum_q = sum_q + 13'(q_len[v]);
      end
    if (sum_q == 0 || gamma_v == 0) begin
      nh = n_max;
    end else begin
      nh = '0;
      rhs = 64'(4) * 64'(n_max) * 64'(n_max) * 64'(gamma_h);
      for (int n = 1; n <= int'(NV); n++) begin
        lhs = 64'((2 * n - 1) * (2 * n - 1)) * 64'(sum_q) * 64'(gamma_v);
        if (n <= int'(n_max) && lhs <= rhs) nh = 7'(n);
      end
    end
    for (int v = 0; v < int'(NV); v++) begin
      rank = 0;
      for (int u = 0; u < int'(NV); u++)
        if (host_target[u] && u != v &&
            (q_len[u] < q_len[v] || (q_len[u] == q_len[v] && u < v)))
          rank++;
      prio[v] = host_target[v] && (rank < int'(nh));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      host_prio <= '0;
      n_h       <= '0;
    end else begin
      host_prio <= prio;
      n_h       <= nh;
    end
  end
endmodule
