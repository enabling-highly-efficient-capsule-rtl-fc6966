// sync_fifo: small synchronous FIFO used as the per-PE command queue.
//
// WIDTH-bit entries, DEPTH entries (power of two). `in_ready` is low when
// full, `out_valid` high when not empty; a push and a pop may happen in the
// same cycle. Data is written on a push and read combinationally from the
// head. Reset empties it. A plain building block of this design.
module sync_fifo #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    rd_q, wr_q;
  logic [AW:0]      cnt_q;
  logic             push, pop;

  assign in_ready  = (cnt_q != (AW+1)'(DEPTH));
  assign out_valid = (cnt_q != '0);
  assign out_data  = mem[rd_q];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_q <= '0; wr_q <= '0; cnt_q <= '0;
      for (int i = 0; i < int'(DEPTH); i++) mem[i] <= '0;
    end else begin
      if (push) begin
        mem[wr_q] <= in_data;
        wr_q <= (wr_q == AW'(DEPTH - 1)) ? '0 : wr_q + 1'b1;
      end
      if (pop) rd_q <= (rd_q == AW'(DEPTH - 1)) ? '0 : rd_q + 1'b1;
      cnt_q <= cnt_q + (push ? (AW+1)'(1) : '0) - (pop ? (AW+1)'(1) : '0);
    end
  end
endmodule
