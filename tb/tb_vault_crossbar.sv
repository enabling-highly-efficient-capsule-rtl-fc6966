// tb_vault_crossbar: random traffic through a 4-vault crossbar.
// Five sources (four vaults and the host) each keep one request in flight to
// a random vault; the vault models accept with random back-pressure and
// answer a random number of cycles later with data derived from the address.
// Each source checks that its answer carries its own tag and the data of its
// own request; the test also counts cycles in which two sources competed for
// one vault and requires that to have happened.
module tb_vault_crossbar;
  import pim_pkg::*;
  localparam int NV = 4;
  localparam int NS = NV + 1;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, contention = 0;

  logic     s_req_valid [NS], s_req_ready [NS], s_rsp_valid [NS];
  mem_req_t s_req [NS];
  mem_rsp_t s_rsp [NS];
  logic     d_req_valid [NV], d_req_ready [NV], d_rsp_valid [NV], d_rsp_ready [NV];
  mem_req_t d_req [NV];
  mem_rsp_t d_rsp [NV];

  vault_crossbar #(.NV(NV)) dut (.*);

  function automatic logic [127:0] pattern(logic [33:0] a);
    return {4{a[31:0] ^ 32'hA5A5_0F0F}};
  endfunction

  // ---- destinations --------------------------------------------------------
  int      d_wait [NV];
  logic    d_busy [NV];
  mem_req_t d_hold [NV];
  always @(posedge clk) begin
    for (int d = 0; d < NV; d++) begin
      if (!rst_n) begin
        d_busy[d] <= 0; d_rsp_valid[d] <= 0; d_wait[d] <= 0;
      end else begin
        if (d_req_valid[d] && d_req_ready[d]) begin
          checks++;
          if (int'(d_req[d].addr[32:28]) != d) begin failures++; $display("FAIL misroute"); end
          d_busy[d] <= 1; d_hold[d] <= d_req[d]; d_wait[d] <= 1 + $urandom % 4;
        end
        if (d_busy[d] && !d_rsp_valid[d]) begin
          if (d_wait[d] == 0) begin
            d_rsp_valid[d] <= 1;
            d_rsp[d] <= '{rdata: pattern(d_hold[d].addr), tag: d_hold[d].tag};
          end else d_wait[d] <= d_wait[d] - 1;
        end
        if (d_rsp_valid[d] && d_rsp_ready[d]) begin
          d_rsp_valid[d] <= 0; d_busy[d] <= 0;
        end
      end
    end
  end
  always_comb for (int d = 0; d < NV; d++) d_req_ready[d] = !d_busy[d] && ($urandom % 4 != 0);

  // ---- sources ---------------------------------------------------------------
  int       done [NS];
  logic     s_out [NS];
  mem_req_t s_last [NS];
  always @(posedge clk) begin
    int n;
    n = 0;
    for (int a = 0; a < NS; a++)
      for (int b = a + 1; b < NS; b++)
        if (s_req_valid[a] && s_req_valid[b] && s_req[a].addr[32:28] == s_req[b].addr[32:28]) n++;
    if (n > 0) contention++;
    for (int s = 0; s < NS; s++) begin
      if (!rst_n) begin
        s_req_valid[s] <= 0; s_out[s] <= 0; done[s] <= 0;
      end else begin
        if (s_req_valid[s] && s_req_ready[s]) begin
          s_req_valid[s] <= 0; s_out[s] <= 1; s_last[s] <= s_req[s];
        end else if (!s_req_valid[s] && !s_out[s] && done[s] < 200) begin
          s_req_valid[s] <= 1;
          s_req[s].we    <= 0;
          s_req[s].wdata <= '0;
          s_req[s].addr  <= {1'b0, 5'($urandom % NV), 24'($urandom), 4'd0};
          s_req[s].tag   <= (s == NV) ? '{vault: 5'd0, src: SRC_HOST}
                                      : '{vault: 5'(s), src: 5'($urandom % 16)};
        end
        if (s_rsp_valid[s]) begin
          checks++;
          if (!s_out[s] || s_rsp[s].tag != s_last[s].tag ||
              s_rsp[s].rdata != pattern(s_last[s].addr)) begin
            failures++; $display("FAIL source %0d response", s);
          end
          s_out[s] <= 0; done[s] <= done[s] + 1;
        end
      end
    end
  end

  initial begin
    int all;
    repeat (3) @(negedge clk);
    rst_n = 1;
    do begin
      @(negedge clk);
      all = 1;
      for (int s = 0; s < NS; s++) if (done[s] < 200) all = 0;
    end while (!all);
    checks++;
    if (contention == 0) begin failures++; $display("FAIL no contention"); end
    $display("contention cycles %0d", contention);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
