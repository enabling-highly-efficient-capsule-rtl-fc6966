// pim_capsnet_top: the PIM-CapsNet logic layer of a Hybrid Memory Cube.
//
// The host GPU runs the convolution and fully connected layers of a capsule
// network and hands the routing procedure to the memory cube. On the cube's
// logic layer this module holds NV vaults (each with 16 processing elements
// and a sub-memory controller, see vault), the crossbar that joins the host
// link and the vaults, the runtime memory access scheduler (RMAS), and a
// command dispatcher that steers each PE command to the vault it names.
//
// Ports:
//   cmd_*      PE commands from the host-side scheduler (valid/ready). The
//              compiler decides off-line which vault and PE run which part
//              of the routing procedure; commands carry that placement.
//   hreq_*     the host's own memory requests (valid/ready) and their
//   hrsp_*     answers; the tag source must be pim_pkg::SRC_HOST.
//   host_target, gamma_v, gamma_h   what the host's current operations use
//              and the RMAS weights; host_prio shows the RMAS decision.
//   bank_*     one request and one response port per DRAM bank per vault.
//              The DRAM dies, TSVs and SerDes links are outside this RTL.
//   vault_busy per-vault activity, the barrier between routing phases.
// Timing: commands are accepted in the cycle they are presented when the
// target PE's queue has room; memory traffic is described in sub_mem_ctrl.
// 16 PEs and 16 banks per vault follow the paper. The paper's cube has 32
// vaults; the default NV here is 2 because synthesising 32 vaults (512 PEs,
// flattened) runs out of memory, and one vault alone already takes close to
// ten minutes. Setting NV = 32 builds the full cube. The port protocol and
// the dispatcher are this design's choices.
// Lint reports a combinational loop through d_req_ready. It is not a real
// loop. The crossbar's request valid does not depend on any ready. The vault's
// ready depends on that valid, and the crossbar's source ready depends on
// that ready. The tool joins the per-vault array elements into one signal.
module pim_capsnet_top
  import pim_pkg::*;
#(
  parameter int unsigned NV    = 2,
  parameter int unsigned NPE   = 16,
  parameter int unsigned NBANK = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cmd_valid,
  output logic        cmd_ready,
  input  host_cmd_t   cmd,
  input  logic        hreq_valid,
  output logic        hreq_ready,
  input  mem_req_t    hreq,
  output logic        hrsp_valid,
  output mem_rsp_t    hrsp,
  input  logic [NV-1:0] host_target,
  input  logic [3:0]  gamma_v,
  input  logic [3:0]  gamma_h,
  output logic [NV-1:0] host_prio,
  output logic [6:0]  n_h,
  input  logic        bank_ready     [NV][NBANK],
  output logic        bank_req_valid [NV][NBANK],
  output bank_req_t   bank_req       [NV][NBANK],
  input  logic        bank_rsp_valid [NV][NBANK],
  input  bank_rsp_t   bank_rsp       [NV][NBANK],
  output logic [5:0]  q_len          [NV],
  output logic [NV-1:0] vault_busy
);
  logic     v_cmd_valid [NV], v_cmd_ready [NV];
  logic     s_req_valid [NV+1], s_req_ready [NV+1], s_rsp_valid [NV+1];
  mem_req_t s_req [NV+1];
  mem_rsp_t s_rsp [NV+1];
  logic     d_req_valid [NV], d_req_ready [NV], d_rsp_valid [NV], d_rsp_ready [NV];
  mem_req_t d_req [NV];
  mem_rsp_t d_rsp [NV];

  // ---- command dispatcher ----------------------------------------------------
  always_comb begin
    cmd_ready = 1'b0;
    for (int v = 0; v < int'(NV); v++) begin
      v_cmd_valid[v] = cmd_valid && (int'(cmd.vault) == v);
      if (int'(cmd.vault) == v) cmd_ready = v_cmd_ready[v];
    end
  end

  for (genvar v = 0; v < int'(NV); v++) begin : g_vault
    vault #(.NPE(NPE), .NBANK(NBANK)) u_vault (
      .clk, .rst_n, .vault_id(VAULT_ID_W'(v)), .host_prio(host_prio[v]),
      .cmd_valid(v_cmd_valid[v]), .cmd_ready(v_cmd_ready[v]), .cmd,
      .rin_valid(d_req_valid[v]), .rin_ready(d_req_ready[v]), .rin_req(d_req[v]),
      .rin_rsp_valid(d_rsp_valid[v]), .rin_rsp_ready(d_rsp_ready[v]),
      .rin_rsp(d_rsp[v]),
      .rout_valid(s_req_valid[v]), .rout_ready(s_req_ready[v]), .rout_req(s_req[v]),
      .rout_rsp_valid(s_rsp_valid[v]), .rout_rsp(s_rsp[v]),
      .bank_ready(bank_ready[v]), .bank_req_valid(bank_req_valid[v]), .bank_req(bank_req[v]),
      .bank_rsp_valid(bank_rsp_valid[v]), .bank_rsp(bank_rsp[v]),
      .q_len(q_len[v]), .busy(vault_busy[v])
    );
  end

  // host link is crossbar source NV
  assign s_req_valid[NV] = hreq_valid;
  assign s_req[NV]       = hreq;
  assign hreq_ready      = s_req_ready[NV];
  assign hrsp_valid      = s_rsp_valid[NV];
  assign hrsp            = s_rsp[NV];

  vault_crossbar #(.NV(NV)) u_xbar (
    .clk, .rst_n,
    .s_req_valid, .s_req_ready, .s_req, .s_rsp_valid, .s_rsp,
    .d_req_valid, .d_req_ready, .d_req, .d_rsp_valid, .d_rsp_ready, .d_rsp
  );

  rmas #(.NV(NV)) u_rmas (
    .clk, .rst_n, .q_len, .host_target, .gamma_v, .gamma_h,
    .host_prio, .n_h
  );
endmodule
