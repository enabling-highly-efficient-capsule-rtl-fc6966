// vault: the logic of one HMC vault in PIM-CapsNet.
//
// Sixteen processing elements sit next to the vault's sub-memory
// controller. Commands for the vault (pim_pkg::host_cmd_t, which names the
// PE) come from the logic layer's dispatcher over one valid/ready port and
// are queued in a small per-PE command queue (CMDQ entries), so a PE runs
// its commands back to back while the dispatcher moves on. Each PE has one
// memory port into the sub-memory controller, which reaches this vault's
// DRAM banks (brought out as ports; the DRAM itself is not part of the logic
// layer) or, through the crossbar, another vault.
// `busy` is high while any PE works or any queue holds a command; a host
// uses it as the barrier between routing phases. `q_len` is the controller's
// count of waiting PE requests, reported to the RMAS.
// The PE count (16) is the paper's; the queue depth and the command port
// are this design's choices.
module vault
  import pim_pkg::*;
#(
  parameter int unsigned NPE   = 16,
  parameter int unsigned NBANK = 16,
  parameter int unsigned CMDQ  = 4
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [VAULT_ID_W-1:0] vault_id,
  input  logic                  host_prio,
  input  logic                  cmd_valid,
  output logic                  cmd_ready,
  input  host_cmd_t             cmd,
  input  logic                  rin_valid,
  output logic                  rin_ready,
  input  mem_req_t              rin_req,
  output logic                  rin_rsp_valid,
  input  logic                  rin_rsp_ready,
  output mem_rsp_t              rin_rsp,
  output logic                  rout_valid,
  input  logic                  rout_ready,
  output mem_req_t              rout_req,
  input  logic                  rout_rsp_valid,
  input  mem_rsp_t              rout_rsp,
  input  logic                  bank_ready     [NBANK],
  output logic                  bank_req_valid [NBANK],
  output bank_req_t             bank_req       [NBANK],
  input  logic                  bank_rsp_valid [NBANK],
  input  bank_rsp_t             bank_rsp       [NBANK],
  output logic [5:0]            q_len,
  output logic                  busy
);
  localparam int unsigned CW = $bits(pe_cmd_t);

  logic     q_in_valid [NPE], q_in_ready [NPE];
  logic     q_out_valid [NPE], q_out_ready [NPE];
  logic [CW-1:0] q_out_data [NPE];
  logic     pe_busy [NPE];
  logic     mreq_valid [NPE], mreq_ready [NPE], mrsp_valid [NPE];
  mem_req_t mreq [NPE];
  mem_rsp_t mrsp [NPE];

  always_comb begin
    cmd_ready = 1'b0;
    for (int p = 0; p < int'(NPE); p++) begin
      q_in_valid[p] = cmd_valid && (int'(cmd.pe) == p);
      if (int'(cmd.pe) == p) cmd_ready = q_in_ready[p];
    end
  end

  for (genvar p = 0; p < int'(NPE); p++) begin : g_pe
    sync_fifo #(.WIDTH(CW), .DEPTH(CMDQ)) u_q (
      .clk, .rst_n,
      .in_valid(q_in_valid[p]), .in_ready(q_in_ready[p]), .in_data(cmd.cmd),
      .out_valid(q_out_valid[p]), .out_ready(q_out_ready[p]),
      .out_data(q_out_data[p])
    );
    pe u_pe (
      .clk, .rst_n, .vault_id, .pe_id(SRC_W'(p)),
      .cmd_valid(q_out_valid[p]), .cmd_ready(q_out_ready[p]),
      .cmd(pe_cmd_t'(q_out_data[p])),
      .mreq_valid(mreq_valid[p]), .mreq_ready(mreq_ready[p]), .mreq(mreq[p]),
      .mrsp_valid(mrsp_valid[p]), .mrsp(mrsp[p]), .busy(pe_busy[p])
    );
  end

  sub_mem_ctrl #(.NPE(NPE), .NBANK(NBANK)) u_smc (
    .clk, .rst_n, .vault_id, .host_prio,
    .pe_req_valid(mreq_valid), .pe_req_ready(mreq_ready), .pe_req(mreq),
    .pe_rsp_valid(mrsp_valid), .pe_rsp(mrsp),
    .rin_valid, .rin_ready, .rin_req, .rin_rsp_valid, .rin_rsp_ready, .rin_rsp,
    .rout_valid, .rout_ready, .rout_req, .rout_rsp_valid, .rout_rsp,
    .bank_ready, .bank_req_valid, .bank_req, .bank_rsp_valid, .bank_rsp, .q_len
  );

  always_comb begin
    busy = 1'b0;
    for (int p = 0; p < int'(NPE); p++)
      busy = busy | pe_busy[p] | q_out_valid[p];
  end
endmodule
