// tb_sub_mem_ctrl: four PEs, the remote-in port and the remote-out port of
// one vault's controller (vault 2) against the DRAM bank model.
// Phase 1: each PE writes then reads back random blocks in its own vault
// and checks the data. Phase 2: all PEs and the remote-in port hit the same
// bank in the same cycle; with host_prio high the remote request must be
// served first, with it low it must wait behind the PEs, and q_len must
// count the waiting requests. Phase 3: a PE addresses vault 5 and the
// request must leave on the remote-out port, its answer returning to it.
module tb_sub_mem_ctrl;
  import pim_pkg::*;
  localparam int NPE = 4, NBANK = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic      host_prio;
  logic      pe_req_valid [NPE], pe_req_ready [NPE], pe_rsp_valid [NPE];
  mem_req_t  pe_req [NPE];
  mem_rsp_t  pe_rsp [NPE];
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

  sub_mem_ctrl #(.NPE(NPE), .NBANK(NBANK)) dut (
    .clk, .rst_n, .vault_id(5'd2), .host_prio,
    .pe_req_valid, .pe_req_ready, .pe_req, .pe_rsp_valid, .pe_rsp,
    .rin_valid, .rin_ready, .rin_req, .rin_rsp_valid, .rin_rsp_ready, .rin_rsp,
    .rout_valid, .rout_ready, .rout_req, .rout_rsp_valid, .rout_rsp,
    .bank_ready(bank_ready[0]), .bank_req_valid(bank_req_valid[0]), .bank_req(bank_req[0]),
    .bank_rsp_valid(bank_rsp_valid[0]), .bank_rsp(bank_rsp[0]), .q_len);

  hmc_dram_model #(.NV(1), .NBANK(NBANK), .LAT(3)) u_dram (.*);

  function automatic logic [33:0] mkaddr(int v, int blk);
    return {1'b0, 5'(v), 24'(blk), 4'd0};
  endfunction

  task automatic pe_access(int p, logic we, logic [33:0] a, logic [127:0] d,
                           output logic [127:0] r);
    @(negedge clk);
    pe_req_valid[p] = 1; pe_req[p] = '{we: we, addr: a, wdata: d,
                                       tag: '{vault: 5'd2, src: 5'(p)}};
    @(posedge clk); while (!pe_req_ready[p]) @(posedge clk);
    @(negedge clk); pe_req_valid[p] = 0;
    while (!pe_rsp_valid[p]) @(negedge clk);
    r = pe_rsp[p].rdata;
  endtask

  initial begin
    logic [127:0] d, r;
    int waited;
    for (int p = 0; p < NPE; p++) begin pe_req_valid[p] = 0; pe_req[p] = '0; end
    rin_valid = 0; rin_req = '0; rin_rsp_ready = 1; rout_ready = 0;
    rout_rsp_valid = 0; rout_rsp = '0; host_prio = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // phase 1
    for (int k = 0; k < 200; k++) begin
      int p, blk;
      p = $urandom % NPE; blk = $urandom % 4096;
      d = {$urandom, $urandom, $urandom, $urandom};
      pe_access(p, 1, mkaddr(2, blk), d, r);
      pe_access((p + 1) % NPE, 0, mkaddr(2, blk), '0, r);
      checks++;
      if (r !== d) begin failures++; $display("FAIL rdwr blk %0d", blk); end
    end
    // phase 2: all on bank 5
    for (int hp = 0; hp < 2; hp++) begin
      @(negedge clk);
      host_prio = hp[0];
      for (int p = 0; p < NPE; p++) begin
        pe_req_valid[p] = 1;
        pe_req[p] = '{we: 0, addr: mkaddr(2, 16 * p + 5), wdata: '0,
                      tag: '{vault: 5'd2, src: 5'(p)}};
      end
      rin_valid = 1;
      rin_req = '{we: 0, addr: mkaddr(2, 16 * 9 + 5), wdata: '0,
                  tag: '{vault: 5'd0, src: SRC_HOST}};
      #1;
      checks++;
      if (rin_ready !== hp[0]) begin failures++; $display("FAIL rin priority hp=%0d", hp); end
      checks++;
      if (int'(q_len) != (hp ? NPE : NPE - 1)) begin
        failures++; $display("FAIL q_len %0d hp=%0d", q_len, hp);
      end
      waited = 0;
      while (!rin_ready) begin
        logic clr [NPE];
        for (int p = 0; p < NPE; p++) clr[p] = pe_req_ready[p];
        @(negedge clk);
        for (int p = 0; p < NPE; p++) if (clr[p]) pe_req_valid[p] = 0;
        #1; waited++;
      end
      @(negedge clk);
      rin_valid = 0;
      for (int p = 0; p < NPE; p++) pe_req_valid[p] = 0;
      repeat (10) @(negedge clk);
      checks++;
      if (!hp && waited == 0) begin failures++; $display("FAIL rin did not wait"); end
    end
    // phase 3: remote out
    fork
      pe_access(1, 0, mkaddr(5, 77), '0, r);
      begin
        @(posedge clk); while (!rout_valid) @(posedge clk);
        checks++;
        if (rout_req.addr[32:28] != 5'd5 || rout_req.tag.src != 5'd1) begin
          failures++; $display("FAIL rout request");
        end
        @(negedge clk); rout_ready = 1; @(negedge clk); rout_ready = 0;
        repeat (3) @(negedge clk);
        rout_rsp_valid = 1; rout_rsp = '{rdata: 128'hFEED, tag: '{vault: 5'd2, src: 5'd1}};
        @(negedge clk); rout_rsp_valid = 0;
      end
    join
    checks++;
    if (r !== 128'hFEED) begin failures++; $display("FAIL remote data"); end
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
