// hmc_dram_model: behavioural model of the DRAM banks under the logic layer.
//
// Not synthesizable logic: it stands for the DRAM dies of the memory cube,
// which are outside the RTL. It has NV x NBANK bank ports, each taking one
// request per cycle and answering every request (reads with data, writes
// with an acknowledge) LAT cycles later with the source number it was given.
// Contents live in one associative array keyed by {vault, bank, block};
// unwritten blocks read as zero. poke/peek give testbenches direct access.
module hmc_dram_model
  import pim_pkg::*;
#(
  parameter int NV    = 1,
  parameter int NBANK = 16,
  parameter int LAT   = 4,
  parameter int BUSY  = 4
) (
  input  logic      clk,
  output logic      bank_ready     [NV][NBANK],
  input  logic      bank_req_valid [NV][NBANK],
  input  bank_req_t bank_req       [NV][NBANK],
  output logic      bank_rsp_valid [NV][NBANK],
  output bank_rsp_t bank_rsp       [NV][NBANK]
);
  logic [127:0] mem [longint];
  logic      pv [LAT][NV][NBANK];
  bank_rsp_t pr [LAT][NV][NBANK];
  int        bsy [NV][NBANK];

  function automatic longint key(int v, int b, logic [19:0] a);
    return (longint'(v) << 32) | (longint'(b) << 24) | longint'(a);
  endfunction

  task automatic poke(int v, int b, logic [19:0] a, logic [127:0] d);
    mem[key(v, b, a)] = d;
  endtask

  function automatic logic [127:0] peek(int v, int b, logic [19:0] a);
    return mem.exists(key(v, b, a)) ? mem[key(v, b, a)] : '0;
  endfunction

  initial begin
    for (int s = 0; s < LAT; s++)
      for (int v = 0; v < NV; v++)
        for (int b = 0; b < NBANK; b++) begin
          pv[s][v][b] = 1'b0;
          pr[s][v][b] = '0;
          bsy[v][b]   = 0;
        end
  end

  always @(posedge clk) begin
    for (int v = 0; v < NV; v++)
      for (int b = 0; b < NBANK; b++) begin
        for (int s = LAT - 1; s > 0; s--) begin
          pv[s][v][b] <= pv[s-1][v][b];
          pr[s][v][b] <= pr[s-1][v][b];
        end
        pv[0][v][b] <= bank_req_valid[v][b];
        if (bsy[v][b] > 0) bsy[v][b] <= bsy[v][b] - 1;
        if (bank_req_valid[v][b]) begin
          if (bsy[v][b] > 0) $error("hmc_dram_model: request to a busy bank");
          bsy[v][b] <= BUSY - 1;
          if (bank_req[v][b].we) mem[key(v, b, bank_req[v][b].baddr)] = bank_req[v][b].wdata;
          pr[0][v][b] <= '{rdata: peek(v, b, bank_req[v][b].baddr),
                           src: bank_req[v][b].src};
        end
      end
  end

  always_comb
    for (int v = 0; v < NV; v++)
      for (int b = 0; b < NBANK; b++) begin
        bank_rsp_valid[v][b] = pv[LAT-1][v][b];
        bank_rsp[v][b]       = pr[LAT-1][v][b];
        bank_ready[v][b]     = (bsy[v][b] == 0);
      end
endmodule
