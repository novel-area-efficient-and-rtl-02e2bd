// karatsuba_core: F_p2 arithmetic unit built from one Montgomery multiplier
// (mmm_core) and one modular adder/subtractor (addsub_core).
//
// F_p2 = F_p[mu]/(mu^2 - beta) with beta = -5; an element is c0 + c1*mu, both
// halves in Montgomery form. Operations (pairing_pkg::kop_e):
//   OP_MUL   c = a*b by Karatsuba:  t0 = a0*b0, t1 = a1*b1,
//            c0 = t0 - RedFp*t1,  c1 = (a0+a1)(b0+b1) - t0 - t1
//   OP_SQR   the same program with b = a
//   OP_MULC  c = (a0*b0, a1*b0): multiplication by the F_p constant b0
//   OP_RED   c = a*xi with xi = mu:  c0 = -RedFp*a1, c1 = a0
//   OP_MMM   c0 = a0*b0 (plain F_p Montgomery product)
// RedFp is an input: 5 in Montgomery form (5*R mod p) for beta = -5.
//
// How it works. A small micro-program (one entry per step) names, for each
// step, an optional multiplier job and an optional add/sub job, each with two
// source registers and a destination register of a 14-entry register file.
// Both jobs of a step start together and the step ends when both are done, so
// an addition hides under a multiplication. The multiplication program is the
// five steps of the source's KARATSUBA diagram:
//   step 1  MMM: t0 = a0*b0        ADD: sa = a0+a1
//   step 2  MMM: t1 = a1*b1        ADD: sb = b0+b1
//   step 3  MMM: u  = t1*RedFp
//   step 4  MMM: v  = sa*sb
//   step 5  SUB: v - t0, then - t1 -> c1;  SUB: t0 - u -> c0
// giving 4 multiplier passes and 3 visible add/sub passes per F_p2 product.
// Own choices: the order of the operands of the final subtraction
// (t0 - u, so that c0 = a0b0 + beta*a1b1) and the programs of OP_SQR, OP_MULC,
// OP_RED and OP_MMM, which the source lists but does not detail.
//
// Interface: pulse start with op and the operands (all < p); done pulses for
// one cycle with c0/c1 valid until the next start. Each step costs its
// slower unit's latency plus 2 cycles (issue, write-back). Latency in clock
// edges after the one that samples start, with Lm = 97 (mmm_core, N = 8) and
// La = 1 (addsub_core):
//   OP_MUL/OP_SQR  4*(Lm+2) + 3*(La+2) = 405
//   OP_MULC        2*(Lm+2)            = 198
//   OP_RED         (Lm+2) + (La+2)     = 102
//   OP_MMM         (Lm+2)              =  99
module karatsuba_core
  import pairing_pkg::*;
#(
  parameter int unsigned W = pairing_pkg::WORD_BITS,
  parameter int unsigned N = pairing_pkg::N_DIGITS
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  kop_e           op,
  input  logic [W*N-1:0] a0,
  input  logic [W*N-1:0] a1,
  input  logic [W*N-1:0] b0,
  input  logic [W*N-1:0] b1,
  input  logic [W*N-1:0] p,
  input  logic [W-1:0]   pinv,
  input  logic [W*N-1:0] redfp,
  output logic [W*N-1:0] c0,
  output logic [W*N-1:0] c1,
  output logic           busy,
  output logic           done
);
  localparam int unsigned F = W * N;

  // Register file indices.
  typedef enum logic [3:0] {
    R_ZERO = 4'd0, R_A0 = 4'd1, R_A1 = 4'd2, R_B0 = 4'd3, R_B1 = 4'd4,
    R_RED = 4'd5, R_T0 = 4'd6, R_T1 = 4'd7, R_SA = 4'd8, R_SB = 4'd9,
    R_U = 4'd10, R_V = 4'd11, R_C0 = 4'd12, R_C1 = 4'd13
  } reg_e;

  typedef struct packed {
    logic m_en;  reg_e m_a; reg_e m_b; reg_e m_d;      // multiplier job
    logic s_en;  logic s_sub; reg_e s_a; reg_e s_b; reg_e s_d;  // add/sub job
    logic last;
  } ustep_t;

  function automatic ustep_t mk(input logic me, input reg_e ma, input reg_e mb, input reg_e md,
                                input logic se, input logic ss, input reg_e sa,
                                input reg_e sb, input reg_e sd, input logic last);
    mk = '{m_en: me, m_a: ma, m_b: mb, m_d: md,
           s_en: se, s_sub: ss, s_a: sa, s_b: sb, s_d: sd, last: last};
  endfunction

  // Micro-program: step pc of operation o.
  function automatic ustep_t prog(input kop_e o, input logic [2:0] pc);
    prog = mk(1'b0, R_ZERO, R_ZERO, R_ZERO, 1'b0, 1'b0, R_ZERO, R_ZERO, R_ZERO, 1'b1);
    unique case (o)
      OP_MUL, OP_SQR:
        unique case (pc)
          3'd0: prog = mk(1, R_A0, R_B0, R_T0,  1, 0, R_A0, R_A1, R_SA, 0);
          3'd1: prog = mk(1, R_A1, R_B1, R_T1,  1, 0, R_B0, R_B1, R_SB, 0);
          3'd2: prog = mk(1, R_T1, R_RED, R_U,  0, 0, R_ZERO, R_ZERO, R_ZERO, 0);
          3'd3: prog = mk(1, R_SA, R_SB, R_V,   0, 0, R_ZERO, R_ZERO, R_ZERO, 0);
          3'd4: prog = mk(0, R_ZERO, R_ZERO, R_ZERO, 1, 1, R_V, R_T0, R_V, 0);
          3'd5: prog = mk(0, R_ZERO, R_ZERO, R_ZERO, 1, 1, R_V, R_T1, R_C1, 0);
          default: prog = mk(0, R_ZERO, R_ZERO, R_ZERO, 1, 1, R_T0, R_U, R_C0, 1);
        endcase
      OP_MULC:
        if (pc == 3'd0) prog = mk(1, R_A0, R_B0, R_C0, 0, 0, R_ZERO, R_ZERO, R_ZERO, 0);
        else            prog = mk(1, R_A1, R_B0, R_C1, 0, 0, R_ZERO, R_ZERO, R_ZERO, 1);
      OP_RED:
        if (pc == 3'd0) prog = mk(1, R_A1, R_RED, R_U, 1, 0, R_A0, R_ZERO, R_C1, 0);
        else            prog = mk(0, R_ZERO, R_ZERO, R_ZERO, 1, 1, R_ZERO, R_U, R_C0, 1);
      default:          // OP_MMM
        prog = mk(1, R_A0, R_B0, R_C0, 0, 0, R_ZERO, R_ZERO, R_ZERO, 1);
    endcase
  endfunction

  typedef enum logic [1:0] {K_IDLE, K_ISSUE, K_WAIT} kst_e;
  kst_e st;
  kop_e op_q;
  logic [2:0] pc;
  logic [F-1:0] rf [14];
  logic m_pend, s_pend;
  ustep_t us;

  assign us = prog(op_q, pc);

  // Shared units.
  logic         m_start, m_done, m_busy, s_start, s_done, s_busy;
  logic [F-1:0] m_res, s_res;
  assign m_start = (st == K_ISSUE) && us.m_en;
  assign s_start = (st == K_ISSUE) && us.s_en;

  logic [W-1:0] pinv_q;
  logic [F-1:0] p_q;

  mmm_core #(.W(W), .N(N)) u_mmm (
    .clk, .rst_n, .start(m_start), .a(rf[us.m_a]), .b(rf[us.m_b]), .p(p_q),
    .pinv(pinv_q), .s(m_res), .busy(m_busy), .done(m_done));

  addsub_core #(.FW(F)) u_addsub (
    .clk, .rst_n, .start(s_start), .sub(us.s_sub), .a(rf[us.s_a]), .b(rf[us.s_b]),
    .p(p_q), .r(s_res), .busy(s_busy), .done(s_done));

  logic m_fin, s_fin;
  assign m_fin = !m_pend || m_done;
  assign s_fin = !s_pend || s_done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= K_IDLE;
      op_q <= OP_MMM;
      pc <= '0;
      m_pend <= 1'b0;
      s_pend <= 1'b0;
      done <= 1'b0;
      c0 <= '0;
      c1 <= '0;
      p_q <= '0;
      pinv_q <= '0;
      for (int k = 0; k < 14; k++) rf[k] <= '0;
    end else begin
      done <= 1'b0;
      unique case (st)
        K_IDLE: if (start) begin
          op_q <= op;
          pc <= '0;
          p_q <= p;
          pinv_q <= pinv;
          for (int k = 0; k < 14; k++) rf[k] <= '0;
          rf[R_A0]  <= a0;
          rf[R_A1]  <= a1;
          rf[R_B0]  <= (op == OP_SQR) ? a0 : b0;
          rf[R_B1]  <= (op == OP_SQR) ? a1 : b1;
          rf[R_RED] <= redfp;
          st <= K_ISSUE;
        end
        K_ISSUE: begin
          m_pend <= us.m_en;
          s_pend <= us.s_en;
          st <= K_WAIT;
        end
        K_WAIT: begin
          if (m_pend && m_done) begin
            rf[us.m_d] <= m_res;
            m_pend <= 1'b0;
          end
          if (s_pend && s_done) begin
            rf[us.s_d] <= s_res;
            s_pend <= 1'b0;
          end
          if (m_fin && s_fin) begin
            if (us.last) begin
              // results: the last step's destination is written this cycle
              c0 <= (m_pend && m_done && us.m_d == R_C0) ? m_res :
                    (s_pend && s_done && us.s_d == R_C0) ? s_res : rf[R_C0];
              c1 <= (m_pend && m_done && us.m_d == R_C1) ? m_res :
                    (s_pend && s_done && us.s_d == R_C1) ? s_res : rf[R_C1];
              done <= 1'b1;
              st <= K_IDLE;
            end else begin
              pc <= pc + 1'b1;
              st <= K_ISSUE;
            end
          end
        end
        default: st <= K_IDLE;
      endcase
    end
  end

  assign busy = (st != K_IDLE);

  assert property (@(posedge clk) disable iff (!rst_n) start |-> st == K_IDLE)
    else $error("karatsuba_core: start while busy");
  assert property (@(posedge clk) disable iff (!rst_n) m_start |-> !m_busy);
  assert property (@(posedge clk) disable iff (!rst_n) s_start |-> !s_busy);

endmodule
