// sub_mem_ctrl: the sub-memory controller of one vault.
//
// It serves three kinds of requests (16-byte blocks, pim_pkg::mem_req_t):
//   * the NPE local PEs, each with at most one request outstanding;
//   * one remote-in port from the crossbar, carrying host (GPU) requests
//     and other vaults' PE requests for this vault (one outstanding);
//   * PE requests whose address names another vault are not served here:
//     they are arbitrated round-robin onto the remote-out port to the
//     crossbar (one outstanding) and the answer is handed back to the PE.
// Every address is decoded by addr_map into bank and bank-local block. Each
// cycle every bank whose `bank_ready` is high takes at most one request:
// when several requesters want the same bank, or the bank is still busy
// with an earlier access (a bank conflict), one is granted at most and the
// rest wait - the paper's vault request stalls. The RMAS input `host_prio` decides who wins
// a conflict between the remote-in port and the PEs (PEs first when low);
// among PEs a rotating pointer gives round-robin fairness.
// Banks answer with the source number they were given (0..NPE-1 for PEs,
// NPE for remote-in); answers go straight back to the PE, or are held for
// the remote-in port until the crossbar takes them.
// `q_len` counts requests waiting for a bank this cycle (the paper's Q).
// Timing: a request is granted in the cycle it is presented if its bank is
// free of higher-priority requests; responses pass through combinationally.
// The paper gives the controller's role and the RMAS priority choice; the
// port set, the one-outstanding rules and the arbitration are this design's.
module sub_mem_ctrl
  import pim_pkg::*;
#(
  parameter int unsigned NPE   = 16,
  parameter int unsigned NBANK = 16
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [VAULT_ID_W-1:0] vault_id,
  input  logic                  host_prio,
  // local PEs
  input  logic                  pe_req_valid [NPE],
  output logic                  pe_req_ready [NPE],
  input  mem_req_t              pe_req       [NPE],
  output logic                  pe_rsp_valid [NPE],
  output mem_rsp_t              pe_rsp       [NPE],
  // remote in (from crossbar)
  input  logic                  rin_valid,
  output logic                  rin_ready,
  input  mem_req_t              rin_req,
  output logic                  rin_rsp_valid,
  input  logic                  rin_rsp_ready,
  output mem_rsp_t              rin_rsp,
  // remote out (to crossbar)
  output logic                  rout_valid,
  input  logic                  rout_ready,
  output mem_req_t              rout_req,
  input  logic                  rout_rsp_valid,
  input  mem_rsp_t              rout_rsp,
  // banks
  input  logic                  bank_ready     [NBANK],
  output logic                  bank_req_valid [NBANK],
  output bank_req_t             bank_req       [NBANK],
  input  logic                  bank_rsp_valid [NBANK],
  input  bank_rsp_t             bank_rsp       [NBANK],
  output logic [5:0]            q_len
);
  localparam int unsigned PW = (NPE > 1) ? $clog2(NPE) : 1;
  localparam logic [SRC_W-1:0] SRC_RIN = SRC_W'(NPE);

  logic [VAULT_ID_W-1:0]  pv [NPE];
  logic [BANK_ID_W-1:0]   pb [NPE];
  logic [BANK_ADDR_W-1:0] pa [NPE];
  logic [2:0]             pind [NPE];
  logic [VAULT_ID_W-1:0]  rv;
  logic [BANK_ID_W-1:0]   rb;
  logic [BANK_ADDR_W-1:0] ra;
  logic [2:0]             rind;

  for (genvar p = 0; p < int'(NPE); p++) begin : g_map
    addr_map u_map (.addr(pe_req[p].addr), .vault(pv[p]), .bank(pb[p]),
                    .baddr(pa[p]), .ind(pind[p]));
  end
  addr_map u_rmap (.addr(rin_req.addr), .vault(rv), .bank(rb), .baddr(ra),
                   .ind(rind));

  logic          rin_busy_q, rout_busy_q, rin_hold_q;
  tag_t          rin_tag_q;
  logic [BLOCK_W-1:0] rin_data_q;
  logic [PW-1:0] rr_q, rout_rr_q;
  logic          rin_go;
  logic          pe_grant [NPE];
  logic          rout_sel_v;
  logic [PW-1:0] rout_sel;

  // ---- bank arbitration ----------------------------------------------------
  // Each bank is arbitrated on its own: the PE requests for it are rotated by
  // the round-robin pointer and the lowest set bit wins.
  logic [NPE-1:0] b_preq [NBANK];
  logic           b_pe_v [NBANK];
  logic [PW-1:0]  b_pe   [NBANK];
  logic           b_rin  [NBANK];
  logic           rin_want;
  assign rin_want = rin_valid && !rin_busy_q;

  always_comb begin
    logic [2*NPE-1:0] rot;
    for (int b = 0; b < int'(NBANK); b++) begin
      for (int p = 0; p < int'(NPE); p++)
        b_preq[b][p] = pe_req_valid[p] && pv[p] == vault_id && int'(pb[p]) == b;
      rot = {b_preq[b], b_preq[b]} >> rr_q;
      b_pe_v[b] = 1'b0;
      b_pe[b]   = '0;
      for (int k = int'(NPE) - 1; k >= 0; k--)
        if (rot[k]) begin
          b_pe_v[b] = 1'b1;
          b_pe[b]   = PW'((int'(rr_q) + k) % int'(NPE));
        end
      b_rin[b] = 1'b0;
      bank_req_valid[b] = 1'b0;
      bank_req[b] = '0;
      if (bank_ready[b]) begin              // a busy bank takes nothing
        if (rin_want && int'(rb) == b && (host_prio || !b_pe_v[b])) begin
          b_rin[b] = 1'b1;                  // remote-in (host priority or idle bank)
          bank_req_valid[b] = 1'b1;
          bank_req[b] = '{we: rin_req.we, baddr: ra, wdata: rin_req.wdata, src: SRC_RIN};
        end else if (b_pe_v[b]) begin
          bank_req_valid[b] = 1'b1;
          bank_req[b] = '{we: pe_req[b_pe[b]].we, baddr: pa[b_pe[b]],
                          wdata: pe_req[b_pe[b]].wdata, src: SRC_W'(b_pe[b])};
        end
      end
    end
  end

  always_comb begin
    rin_go = 1'b0;
    q_len  = '0;
    for (int p = 0; p < int'(NPE); p++) pe_grant[p] = 1'b0;
    for (int b = 0; b < int'(NBANK); b++) begin
      rin_go = rin_go | b_rin[b];
      for (int p = 0; p < int'(NPE); p++)
        if (bank_ready[b] && !b_rin[b] && b_pe_v[b] && b_pe[b] == PW'(p))
          pe_grant[p] = 1'b1;
    end
    // PE requests that found their bank taken or busy wait: a conflict
    for (int p = 0; p < int'(NPE); p++)
      if (pe_req_valid[p] && pv[p] == vault_id && !pe_grant[p]) q_len = q_len + 6'd1;
  end

  // ---- remote-out arbitration ----------------------------------------------
  always_comb begin
    logic [PW-1:0] p;
    rout_sel_v = 1'b0;
    rout_sel   = '0;
    for (int k = int'(NPE) - 1; k >= 0; k--) begin
      p = PW'((int'(rout_rr_q) + k) % int'(NPE));
      if (pe_req_valid[p] && pv[p] != vault_id) begin
        rout_sel_v = 1'b1; rout_sel = p;
      end
    end
  end
  assign rout_valid = rout_sel_v && !rout_busy_q;
  assign rout_req   = pe_req[rout_sel];

  always_comb begin
    for (int i = 0; i < int'(NPE); i++)
      pe_req_ready[i] = pe_grant[i] ||
                        (rout_valid && rout_ready && rout_sel == PW'(i));
  end
  assign rin_ready = rin_go;

  // ---- responses -----------------------------------------------------------
  always_comb begin
    for (int i = 0; i < int'(NPE); i++) begin
      pe_rsp_valid[i] = 1'b0;
      pe_rsp[i] = '0;
    end
    for (int b = 0; b < int'(NBANK); b++)
      if (bank_rsp_valid[b] && int'(bank_rsp[b].src) < int'(NPE)) begin
        pe_rsp_valid[PW'(bank_rsp[b].src)] = 1'b1;
        pe_rsp[PW'(bank_rsp[b].src)] = '{rdata: bank_rsp[b].rdata,
                                    tag: '{vault: vault_id, src: bank_rsp[b].src}};
      end
    if (rout_rsp_valid && int'(rout_rsp.tag.src) < int'(NPE)) begin
      pe_rsp_valid[PW'(rout_rsp.tag.src)] = 1'b1;
      pe_rsp[PW'(rout_rsp.tag.src)] = rout_rsp;
    end
  end
  assign rin_rsp_valid = rin_hold_q;
  assign rin_rsp       = '{rdata: rin_data_q, tag: rin_tag_q};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rin_busy_q  <= 1'b0;
      rin_hold_q  <= 1'b0;
      rin_tag_q   <= '0;
      rin_data_q  <= '0;
      rout_busy_q <= 1'b0;
      rr_q        <= '0;
      rout_rr_q   <= '0;
    end else begin
      rr_q <= (rr_q == PW'(NPE - 1)) ? '0 : rr_q + 1'b1;
      if (rin_go) begin
        rin_busy_q <= 1'b1;
        rin_tag_q  <= rin_req.tag;
      end
      for (int b = 0; b < int'(NBANK); b++)
        if (bank_rsp_valid[b] && bank_rsp[b].src == SRC_RIN) begin
          rin_hold_q <= 1'b1;
          rin_data_q <= bank_rsp[b].rdata;
        end
      if (rin_hold_q && rin_rsp_ready) begin
        rin_hold_q <= 1'b0;
        rin_busy_q <= 1'b0;
      end
      if (rout_valid && rout_ready) begin
        rout_busy_q <= 1'b1;
        rout_rr_q   <= (rout_sel == PW'(NPE - 1)) ? '0 : rout_sel + 1'b1;
      end
      if (rout_rsp_valid) rout_busy_q <= 1'b0;
    end
  end

  // a remote answer may only arrive for the one remote request in flight
  assert property (@(posedge clk) disable iff (!rst_n)
                   rout_rsp_valid |-> rout_busy_q)
    else $error("sub_mem_ctrl: unexpected remote response");
endmodule
