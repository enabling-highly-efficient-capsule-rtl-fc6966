// pe_op_controller: the OP controller of a processing element.
//
// The PE has one multiplier (unit 1), one adder (unit 2) and one bit shifter
// (unit 3) chained through multiplexers; the OP controller sets those
// multiplexers each cycle by emitting one micro-operation (pim_pkg::uop_t).
// A micro-operation may use any ordered subset of the chain 1 -> 2 -> 3, so
// a multiply-accumulate is a single step. Longer functions are short fixed
// programs held in a case table:
//   MAC/MUL/ADD/SUB  1 step             flow 1-2 (MAC), 1, 2, 2
//   RSQRT            6 steps            flow 3,2,1,1,1-2,1: seed by shift and
//                                       integer subtract, one Newton step
//   RECIP            5 steps            flow 2,1-2,1,1-2,1: seed by integer
//                                       subtract, two Newton steps
//   EXP              3 steps            flow 1-2, 2-3, 1: y = log2(e)*x + b,
//                                       + (Avg - 1), BS shift, then the one
//                                       accuracy-recovery multiplication
// Interface: pulse `start` with `op` for one cycle while idle; the next cycle
// and every following cycle until the step flagged `last` present a valid
// micro-operation; `busy` is high from the cycle after `start` until that
// last step. The paper gives the flows 1-2 (MAC), 3-2-1-2-1 (inverse square
// root) and 1-2-2-3 (exponential); the exact step lists, the Newton counts
// and the encoding are this design's own.
module pe_op_controller
  import pim_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    start,
  input  pe_op_e  op,
  output logic    uop_valid,
  output uop_t    uop,
  output logic    busy
);
  pe_op_e     op_q;
  logic [2:0] step_q;
  logic       busy_q;

  function automatic uop_t mk(logic m, logic a, logic s, add_mode_e am,
                              sh_mode_e sm, src_e sa, src_e sb, src_e sc,
                              logic [1:0] d, logic l);
    uop_t u;
    u.mul_en = m; u.add_en = a; u.sh_en = s; u.add_mode = am; u.sh_mode = sm;
    u.src_a = sa; u.src_b = sb; u.src_c = sc; u.dst = d; u.last = l;
    return u;
  endfunction

  function automatic uop_t program_step(pe_op_e o, logic [2:0] st);
    uop_t u;
    u = mk(1'b0, 1'b0, 1'b0, ADD_F, SH_R1, S_X, S_Y, S_ZERO, 2'd0, 1'b1);
    unique case (o)
      PE_MAC: u = mk(1, 1, 0, ADD_F,  SH_R1, S_X, S_Y, S_Z, 2'd0, 1);
      PE_MUL: u = mk(1, 0, 0, ADD_F,  SH_R1, S_X, S_Y, S_ZERO, 2'd0, 1);
      PE_ADD: u = mk(0, 1, 0, ADD_F,  SH_R1, S_X, S_ZERO, S_Y, 2'd0, 1);
      PE_SUB: u = mk(0, 1, 0, ADD_FR, SH_R1, S_Y, S_ZERO, S_X, 2'd0, 1);
      PE_RSQRT:
        unique case (st)
          3'd0: u = mk(0, 0, 1, ADD_F,  SH_R1, S_X,  S_ZERO, S_ZERO,      2'd0, 0); // x>>1
          3'd1: u = mk(0, 1, 0, ADD_IR, SH_R1, S_T0, S_ZERO, S_KRSQRT,    2'd1, 0); // y0
          3'd2: u = mk(1, 0, 0, ADD_F,  SH_R1, S_X,  S_HALF, S_ZERO,      2'd2, 0); // x/2
          3'd3: u = mk(1, 0, 0, ADD_F,  SH_R1, S_T1, S_T1,   S_ZERO,      2'd3, 0); // y0^2
          3'd4: u = mk(1, 1, 0, ADD_FR, SH_R1, S_T3, S_T2,   S_THREEHALF, 2'd3, 0); // 1.5-x/2*y0^2
          default: u = mk(1, 0, 0, ADD_F, SH_R1, S_T1, S_T3, S_ZERO,      2'd0, 1); // y1
        endcase
      PE_RECIP:
        unique case (st)
          3'd0: u = mk(0, 1, 0, ADD_IR, SH_R1, S_X,  S_ZERO, S_KRECIP, 2'd0, 0); // y0
          3'd1: u = mk(1, 1, 0, ADD_FR, SH_R1, S_X,  S_T0,   S_TWO,    2'd1, 0); // 2-x*y0
          3'd2: u = mk(1, 0, 0, ADD_F,  SH_R1, S_T0, S_T1,   S_ZERO,   2'd0, 0); // y1
          3'd3: u = mk(1, 1, 0, ADD_FR, SH_R1, S_X,  S_T0,   S_TWO,    2'd1, 0); // 2-x*y1
          default: u = mk(1, 0, 0, ADD_F, SH_R1, S_T0, S_T1, S_ZERO,   2'd0, 1); // y2
        endcase
      PE_EXP:
        unique case (st)
          3'd0: u = mk(1, 1, 0, ADD_F, SH_R1, S_X,  S_LOG2E, S_BIAS,  2'd0, 0); // log2e*x + b
          3'd1: u = mk(0, 1, 1, ADD_F, SH_BS, S_T0, S_ZERO,  S_AVGM1, 2'd1, 0); // BS(.. + Avg-1)
          default: u = mk(1, 0, 0, ADD_F, SH_R1, S_T1, S_RECOV, S_ZERO, 2'd0, 1); // recovery
        endcase
      default: ;
    endcase
    return u;
  endfunction

  assign uop       = program_step(op_q, step_q);
  assign uop_valid = busy_q;
  assign busy      = busy_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_q <= 1'b0;
      step_q <= '0;
      op_q   <= PE_NOP;
    end else if (start && !busy_q) begin
      busy_q <= 1'b1;
      step_q <= '0;
      op_q   <= op;
    end else if (busy_q) begin
      if (uop.last) busy_q <= 1'b0;
      else          step_q <= step_q + 3'd1;
    end
  end
endmodule
