// vault_crossbar: the logic-layer crossbar between the host link and the
// vaults.
//
// Sources are the NV vaults' remote-out ports plus the host link (source
// NV); destinations are the vaults' remote-in ports. A request goes to the
// vault named by address bits 32..28; when several sources want the same
// vault, a round-robin pointer per destination picks one. Answers return by
// the request tag: source field pim_pkg::SRC_HOST means the host, anything
// else the vault named in the tag; several answers for one source are again
// arbitrated round-robin. Everything is combinational apart from the
// pointers; valid/ready on every port.
// The paper only names the crossbar (it belongs to the HMC logic layer it
// builds on); this minimal implementation is this design's own.
module vault_crossbar
  import pim_pkg::*;
#(
  parameter int unsigned NV = 32
) (
  input  logic     clk,
  input  logic     rst_n,
  // sources: 0..NV-1 vault remote-out, NV host
  input  logic     s_req_valid [NV+1],
  output logic     s_req_ready [NV+1],
  input  mem_req_t s_req       [NV+1],
  output logic     s_rsp_valid [NV+1],
  output mem_rsp_t s_rsp       [NV+1],
  // destinations: vault remote-in
  output logic     d_req_valid [NV],
  input  logic     d_req_ready [NV],
  output mem_req_t d_req       [NV],
  input  logic     d_rsp_valid [NV],
  output logic     d_rsp_ready [NV],
  input  mem_rsp_t d_rsp       [NV]
);
  localparam int unsigned NS = NV + 1;
  localparam int unsigned SW = $clog2(NS + 1);
  localparam int unsigned DW = (NV > 1) ? $clog2(NV) : 1;

  logic [SW-1:0] req_ptr_q [NV];
  logic [DW-1:0] rsp_ptr_q [NS];
  logic [SW-1:0] req_sel   [NV];
  logic          req_selv  [NV];
  logic [DW-1:0] rsp_sel   [NS];
  logic          rsp_selv  [NS];

  function automatic int rsp_dest(mem_rsp_t r);
    return (r.tag.src == SRC_HOST) ? int'(NV) : int'(r.tag.vault);
  endfunction

  always_comb begin
    logic [SW:0] s;
    for (int d = 0; d < int'(NV); d++) begin
      req_selv[d] = 1'b0; req_sel[d] = '0;
      for (int k = int'(NS) - 1; k >= 0; k--) begin
        s = (SW+1)'(req_ptr_q[d]) + (SW+1)'(k);
        if (s >= (SW+1)'(NS)) s = s - (SW+1)'(NS);
        if (s_req_valid[s] && int'(s_req[s].addr[32:28]) == d) begin
          req_selv[d] = 1'b1; req_sel[d] = SW'(s);
        end
      end
      d_req_valid[d] = req_selv[d];
      d_req[d]       = s_req[req_sel[d]];
    end
    for (int i = 0; i < int'(NS); i++) begin
      s_req_ready[i] = 1'b0;
      for (int d = 0; d < int'(NV); d++)
        if (req_selv[d] && d_req_ready[d] && req_sel[d] == SW'(i)) s_req_ready[i] = 1'b1;
    end
  end

  always_comb begin
    logic [DW:0] d;
    for (int s = 0; s < int'(NS); s++) begin
      rsp_selv[s] = 1'b0; rsp_sel[s] = '0;
      for (int k = int'(NV) - 1; k >= 0; k--) begin
        d = (DW+1)'(rsp_ptr_q[s]) + (DW+1)'(k);
        if (d >= (DW+1)'(NV)) d = d - (DW+1)'(NV);
        if (d_rsp_valid[d] && rsp_dest(d_rsp[d]) == s) begin
          rsp_selv[s] = 1'b1; rsp_sel[s] = DW'(d);
        end
      end
      s_rsp_valid[s] = rsp_selv[s];
      s_rsp[s]       = d_rsp[rsp_sel[s]];
    end
    for (int i = 0; i < int'(NV); i++) begin
      d_rsp_ready[i] = 1'b0;
      for (int s = 0; s < int'(NS); s++)
        if (rsp_selv[s] && rsp_sel[s] == DW'(i)) d_rsp_ready[i] = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int d = 0; d < int'(NV); d++) req_ptr_q[d] <= '0;
      for (int s = 0; s < int'(NS); s++) rsp_ptr_q[s] <= '0;
    end else begin
      for (int d = 0; d < int'(NV); d++)
        if (req_selv[d] && d_req_ready[d])
          req_ptr_q[d] <= (int'(req_sel[d]) == int'(NS) - 1) ? '0 : req_sel[d] + 1'b1;
      for (int s = 0; s < int'(NS); s++)
        if (rsp_selv[s])
          rsp_ptr_q[s] <= (int'(rsp_sel[s]) == int'(NV) - 1) ? '0 : rsp_sel[s] + 1'b1;
    end
  end
endmodule
