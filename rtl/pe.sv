// pe: one PIM-CapsNet processing element on the HMC logic layer.
//
// Structure (after the PE drawing of the intra-vault figure): a data buffer,
// a multiplier (unit 1), an adder (unit 2) and a bit shifter (unit 3) joined
// in a chain by three multiplexers, and an OP controller that sets the
// multiplexers. Every multiplexer can take the previous unit's result or a
// fresh operand, so one cycle can do "1", "1-2", "2-3" and so on; the result
// of a step goes to a temporary (T0..T3) and, on the last step of a command,
// to the data buffer.
//
// Commands (pim_pkg::pe_cmd_t) arrive over a valid/ready port, one at a time:
//   LOAD/STORE  move one 16-byte block (four FP32 words) between memory and
//               data buffer entries dst..dst+3 (LOAD) or a..a+3 (STORE)
//   SETI        write an immediate into the data buffer (one cycle)
//   MAC MUL ADD SUB RSQRT RECIP EXP   arithmetic, see pe_op_controller
// Operands db[a], db[b], db[c] are latched when a command is accepted.
// Timing: arithmetic takes 1 (accept) + the program's step count cycles;
// a memory command holds the request until accepted and then waits for the
// response. Only one memory request is outstanding per PE. `busy` is high
// whenever a command is in flight.
// The number of data buffer entries (32), the command set and the memory
// protocol are this design's choices; the paper fixes the unit chain.
module pe
  import pim_pkg::*;
#(
  parameter int unsigned DEPTH = DB_DEPTH
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [VAULT_ID_W-1:0] vault_id,
  input  logic [SRC_W-1:0]      pe_id,
  // command port
  input  logic                  cmd_valid,
  output logic                  cmd_ready,
  input  pe_cmd_t               cmd,
  // memory port to the sub-memory controller
  output logic                  mreq_valid,
  input  logic                  mreq_ready,
  output mem_req_t              mreq,
  input  logic                  mrsp_valid,
  input  mem_rsp_t              mrsp,
  output logic                  busy
);
  typedef enum logic [1:0] {ST_IDLE, ST_EXEC, ST_MREQ, ST_MWAIT} state_e;
  state_e      st_q;
  pe_cmd_t     cmd_q;
  logic [31:0] db [DEPTH];
  logic [31:0] x_q, y_q, z_q;
  logic [31:0] t_q [4];
  logic [BLOCK_W-1:0] wdata_q;

  logic  oc_start, oc_valid, oc_busy;
  uop_t  u;
  logic  is_arith;

  assign is_arith = cmd.op inside {PE_MAC, PE_MUL, PE_ADD, PE_SUB, PE_RSQRT,
                                   PE_RECIP, PE_EXP};
  assign cmd_ready = (st_q == ST_IDLE);
  assign oc_start  = cmd_valid && cmd_ready && is_arith;
  assign busy      = (st_q != ST_IDLE);

  pe_op_controller u_opc (
    .clk, .rst_n, .start(oc_start), .op(cmd.op),
    .uop_valid(oc_valid), .uop(u), .busy(oc_busy)
  );

  // ---- operand multiplexers ----------------------------------------------
  function automatic logic [31:0] pick(src_e s, logic [31:0] x, logic [31:0] y,
                                       logic [31:0] z, logic [31:0] t0,
                                       logic [31:0] t1, logic [31:0] t2,
                                       logic [31:0] t3);
    unique case (s)
      S_X: return x;            S_Y: return y;          S_Z: return z;
      S_T0: return t0;          S_T1: return t1;        S_T2: return t2;
      S_T3: return t3;          S_LOG2E: return FP_LOG2E;
      S_BIAS: return FP_BIAS;   S_AVGM1: return FP_AVGM1;
      S_RECOV: return FP_RECOV; S_HALF: return FP_HALF;
      S_THREEHALF: return FP_THREEHALF;
      S_TWO: return FP_TWO;     S_KRSQRT: return K_RSQRT;
      S_KRECIP: return K_RECIP;
      default: return FP_ZERO;
    endcase
  endfunction

  logic [31:0] opa, opb, opc, mul_y, add_in, add_y, sh_in, sh_y, res;
  always_comb begin
    opa    = pick(u.src_a, x_q, y_q, z_q, t_q[0], t_q[1], t_q[2], t_q[3]);
    opb    = pick(u.src_b, x_q, y_q, z_q, t_q[0], t_q[1], t_q[2], t_q[3]);
    opc    = pick(u.src_c, x_q, y_q, z_q, t_q[0], t_q[1], t_q[2], t_q[3]);
    add_in = u.mul_en ? mul_y : opa;                 // mux 2
    sh_in  = u.add_en ? add_y : add_in;              // mux 3
    res    = u.sh_en  ? sh_y  : sh_in;
  end

  fp32_mul   u_mul (.a(opa), .b(opb), .y(mul_y));
  fp32_add   u_add (.a(add_in), .c(opc), .mode(u.add_mode), .y(add_y));
  pe_shifter u_sh  (.x(sh_in), .mode(u.sh_mode), .y(sh_y));

  // ---- memory request ------------------------------------------------------
  always_comb begin
    mreq.we        = (cmd_q.op == PE_STORE);
    mreq.addr      = cmd_q.addr;
    mreq.wdata     = wdata_q;
    mreq.tag.vault = vault_id;
    mreq.tag.src   = pe_id;
  end
  assign mreq_valid = (st_q == ST_MREQ);

  // ---- control -------------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q    <= ST_IDLE;
      cmd_q   <= '0;
      x_q     <= '0; y_q <= '0; z_q <= '0;
      wdata_q <= '0;
      for (int i = 0; i < 4; i++) t_q[i] <= '0;
      for (int i = 0; i < int'(DEPTH); i++) db[i] <= '0;
    end else begin
      unique case (st_q)
        ST_IDLE:
          if (cmd_valid) begin
            cmd_q <= cmd;
            x_q   <= db[cmd.a];
            y_q   <= db[cmd.b];
            z_q   <= db[cmd.c];
            for (int i = 0; i < 4; i++)
              wdata_q[32*i +: 32] <= db[DB_AW'(cmd.a + DB_AW'(i))];
            unique case (cmd.op)
              PE_SETI:            db[cmd.dst] <= cmd.imm;
              PE_LOAD, PE_STORE:  st_q <= ST_MREQ;
              PE_NOP:             ;
              default:            st_q <= ST_EXEC;
            endcase
          end
        ST_EXEC:
          if (oc_valid) begin
            t_q[u.dst] <= res;
            if (u.last) begin
              db[cmd_q.dst] <= res;
              st_q <= ST_IDLE;
            end
          end
        ST_MREQ:
          if (mreq_ready) st_q <= ST_MWAIT;
        ST_MWAIT:
          if (mrsp_valid) begin
            if (cmd_q.op == PE_LOAD)
              for (int i = 0; i < 4; i++)
                db[DB_AW'(cmd_q.dst + DB_AW'(i))] <= mrsp.rdata[32*i +: 32];
            st_q <= ST_IDLE;
          end
        default: st_q <= ST_IDLE;
      endcase
    end
  end

  // a response may only come while one is awaited
  assert property (@(posedge clk) disable iff (!rst_n)
                   mrsp_valid |-> st_q == ST_MWAIT)
    else $error("pe: unexpected memory response");
endmodule
