// mmm_core: word-serial radix-2^W Montgomery modular multiplier,
//           S = A * B * R^-1 mod p with R = 2^(W*N).
//
// How it works. The outer loop runs over the digits A[i] of A. For each i the
// core first forms H[0] = S[0] + A[i]*B[0] (multiplier Mul1, adders Add1/Add2,
// register Reg1) and then the quotient digit q_i = H[0]*p' mod 2^W on the
// second multiplier Mul2, whose first operand is switched from p[j] to p' by
// Mux2 (signal ctr_mux) and whose result is kept in Reg3 (ctr_qi). The inner
// loop then streams j = 0..N-1 through a two-stage pipeline:
//   "Hi" stage: (C1[j],H1[j]) = A[i]*B[j];
//               H[j] = H1[j] + C1[j-1] + S[j] + carries c1, c2   -> Reg1
//   "Si" stage: (C2[j],H2[j]) = q_i*p[j];
//               S[j-1] = H[j] + H2[j] + C2[j-1] + carries c3, c4
// C1[j-1] and C2[j-1] are held in the high-word registers (Reg2, Reg4) and the
// four one-bit carries in flip-flops, exactly as in the source's block
// diagram. The top digit is S[N-1] = C1[N-1]+c1+c2 + C2[N-1]+c3+c4. The S
// digits live in a small register block (the "block register" queue); a digit
// is always read by the Hi stage two cycles before the Si stage overwrites it.
//
// Departures / own choices: the source's Algorithm 2 line 10 reads q_i*p[i];
// the p digit must be p[j] and this core uses p[j]. The algorithm ends with
// S < 2p; this core adds one conditional subtraction so that the result is
// fully reduced (0 <= S < p), which lets the ADD/SUB core take it directly.
// Operands are presented as whole vectors (the digit selection muxes stand for
// the operand memory of the source).
//
// Interface: pulse start for one cycle with a, b < p, p odd, p < 2^(W*N-1)
// and pinv = -p^-1 mod 2^W. done pulses for one cycle with the result on s,
// which stays valid until the next start. busy is high in between.
// Timing: LATENCY = N*(N+4) + 1 clock edges from the edge that samples start
// to the edge that raises done (97 for N = 8).
module mmm_core #(
  parameter int unsigned W = pairing_pkg::WORD_BITS,
  parameter int unsigned N = pairing_pkg::N_DIGITS
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [W*N-1:0] a,
  input  logic [W*N-1:0] b,
  input  logic [W*N-1:0] p,
  input  logic [W-1:0]   pinv,
  output logic [W*N-1:0] s,
  output logic           busy,
  output logic           done
);
  localparam int unsigned IW = (N <= 2) ? 2 : $clog2(N + 2);

  typedef enum logic [2:0] {ST_IDLE, ST_H0, ST_Q, ST_LOOP, ST_TOP, ST_FINAL} st_e;
  st_e st;

  logic [W-1:0]  a_q [N];          // operand memory
  logic [W-1:0]  b_q [N];
  logic [W-1:0]  p_q [N];
  logic [W-1:0]  pinv_q;
  logic [W-1:0]  s_q [N];          // block register holding S[j]_i
  logic [IW-1:0] i_q, j_q;

  logic [W-1:0] reg1;              // H[j]_i
  logic [W-1:0] reg2;              // C1[j-1]_i
  logic [W-1:0] reg3;              // q_i
  logic [W-1:0] reg4;              // C2[j-1]_i
  logic         c1, c2, c3, c4;    // carry flip-flops

  // ---------------- Hi computation (Mul1, Add1, Add2) ----------------
  logic [IW-1:0] jh;               // digit index seen by the Hi stage
  logic [2*W-1:0] mul1;
  logic [W:0]     add1, add2;
  assign jh   = (st == ST_H0) ? '0 : j_q;
  assign mul1 = a_q[i_q[$clog2(N)-1:0]] * b_q[jh[$clog2(N)-1:0]];
  assign add1 = {1'b0, mul1[W-1:0]} + {1'b0, reg2} + W'(c1);
  assign add2 = {1'b0, add1[W-1:0]} + {1'b0, s_q[jh[$clog2(N)-1:0]]} + W'(c2);

  // ---------------- Si computation (Mux2, Mul2, Add3, Add4) ----------------
  logic [W-1:0]   mul2_x, mul2_y;
  logic [2*W-1:0] mul2;
  logic [IW-1:0]  js;              // digit index seen by the Si stage (j-1)
  logic [W:0]     add3, add4;
  assign js     = j_q - 1'b1;
  // ctr_mux: in ST_Q Mul2 computes H[0]*p', otherwise q_i*p[j]
  assign mul2_x = (st == ST_Q) ? reg1 : reg3;
  assign mul2_y = (st == ST_Q) ? pinv_q : p_q[js[$clog2(N)-1:0]];
  assign mul2   = mul2_x * mul2_y;
  assign add3   = {1'b0, reg1} + {1'b0, mul2[W-1:0]} + W'(c3);
  assign add4   = {1'b0, add3[W-1:0]} + {1'b0, reg4} + W'(c4);

  // Top digit and final conditional subtraction.
  logic [W-1:0]   top_digit;
  logic [W*N-1:0] s_vec;
  logic [W*N:0]   s_minus_p;
  assign top_digit = reg2 + W'(c1) + W'(c2) + reg4 + W'(c3) + W'(c4);
  always_comb
    for (int k = 0; k < N; k++) s_vec[k*W +: W] = s_q[k];
  logic [W*N-1:0] p_vec;
  always_comb
    for (int k = 0; k < N; k++) p_vec[k*W +: W] = p_q[k];
  assign s_minus_p = {1'b0, s_vec} - {1'b0, p_vec};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= ST_IDLE;
      i_q <= '0; j_q <= '0;
      reg1 <= '0; reg2 <= '0; reg3 <= '0; reg4 <= '0;
      {c1, c2, c3, c4} <= '0;
      pinv_q <= '0;
      s <= '0;
      done <= 1'b0;
      for (int k = 0; k < N; k++) begin
        a_q[k] <= '0; b_q[k] <= '0; p_q[k] <= '0; s_q[k] <= '0;
      end
    end else begin
      done <= 1'b0;
      unique case (st)
        ST_IDLE: if (start) begin
          for (int k = 0; k < N; k++) begin
            a_q[k] <= a[k*W +: W];
            b_q[k] <= b[k*W +: W];
            p_q[k] <= p[k*W +: W];
            s_q[k] <= '0;                       // S_0 = 0
          end
          pinv_q <= pinv;
          i_q <= '0;
          reg2 <= '0;
          reg4 <= '0;
          {c1, c2, c3, c4} <= '0;
          st  <= ST_H0;
        end
        ST_H0: begin                            // H[0]_i = S[0]_i + A[i]*B[0]
          reg1 <= add2[W-1:0];
          st <= ST_Q;
        end
        ST_Q: begin                             // q_i = H[0]_i * p' mod 2^W  (Reg3)
          reg3 <= mul2[W-1:0];
          j_q <= '0;
          st <= ST_LOOP;
        end
        ST_LOOP: begin
          // Hi stage, digit j (j <= N-1)
          if (j_q < IW'(N)) begin
            reg1 <= add2[W-1:0];
            reg2 <= mul1[2*W-1:W];
            c1   <= add1[W];
            c2   <= add2[W];
          end
          // Si stage, digit j-1 (j >= 1): writes S[j-2]
          if (j_q >= IW'(1)) begin
            reg4 <= mul2[2*W-1:W];
            c3   <= add3[W];
            c4   <= add4[W];
            if (j_q >= IW'(2)) s_q[js[$clog2(N)-1:0] - 1'b1] <= add4[W-1:0];
          end
          if (j_q == IW'(N)) st <= ST_TOP;
          j_q <= j_q + 1'b1;
        end
        ST_TOP: begin                           // S[N-1]_i from the carries
          s_q[N-1] <= top_digit;
          reg2 <= '0;                           // C1[-1] = C2[-1] = 0, carries 0
          reg4 <= '0;
          {c1, c2, c3, c4} <= '0;
          if (i_q == IW'(N - 1)) st <= ST_FINAL;
          else begin
            i_q <= i_q + 1'b1;
            st  <= ST_H0;
          end
        end
        ST_FINAL: begin                         // S_e < 2p -> reduce to [0, p)
          s    <= s_minus_p[W*N] ? s_vec : s_minus_p[W*N-1:0];
          done <= 1'b1;
          st   <= ST_IDLE;
        end
        default: st <= ST_IDLE;
      endcase
    end
  end

  assign busy = (st != ST_IDLE);

  // A new operation may only be started while the core is idle.
  assert property (@(posedge clk) disable iff (!rst_n) start |-> st == ST_IDLE)
    else $error("mmm_core: start while busy");

endmodule
