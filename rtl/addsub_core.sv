// addsub_core: modular addition / subtraction in F_p (the ADD/SUB core).
//
// r = (a + b) mod p  when sub = 0,
// r = (a - b) mod p  when sub = 1,   for 0 <= a, b < p.
//
// The source names this core, gives its function and its cost (it is the
// second unit inside the KARATSUBA core) but not its structure. This is the
// simplest circuit that does the job: cycle 1 forms the raw sum or difference
// with one extra bit, cycle 2 applies the single correction (subtract p after
// an addition that reached p, add p after a subtraction that borrowed).
//
// Interface: pulse start for one cycle; done pulses for one cycle, raised by
// the clock edge after the one that sampled start (latency La = 1 edge, two
// clock cycles of work), with r valid from then on until the next start.
module addsub_core #(
  parameter int unsigned FW = pairing_pkg::FIELD_BITS
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic          sub,
  input  logic [FW-1:0] a,
  input  logic [FW-1:0] b,
  input  logic [FW-1:0] p,
  output logic [FW-1:0] r,
  output logic          busy,
  output logic          done
);
  logic          stage;        // 1 while the correction step is pending
  logic          sub_q;
  logic [FW:0]   raw_q;        // a+b or a-b with carry / borrow bit
  logic [FW-1:0] p_q;
  logic [FW:0]   corr;         // raw - p (add) or raw + p (sub)

  always_comb begin
    if (sub_q) corr = raw_q + {1'b0, p_q};
    else       corr = raw_q - {1'b0, p_q};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      stage <= 1'b0;
      sub_q <= 1'b0;
      raw_q <= '0;
      p_q   <= '0;
      r     <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        sub_q <= sub;
        p_q   <= p;
        raw_q <= sub ? ({1'b0, a} - {1'b0, b}) : ({1'b0, a} + {1'b0, b});
        stage <= 1'b1;
      end else if (stage) begin
        if (sub_q) r <= raw_q[FW] ? corr[FW-1:0] : raw_q[FW-1:0];   // borrow -> +p
        else       r <= corr[FW]  ? raw_q[FW-1:0] : corr[FW-1:0];   // a+b >= p -> -p
        done  <= 1'b1;
        stage <= 1'b0;
      end
    end
  end

  assign busy = stage;

  assert property (@(posedge clk) disable iff (!rst_n) start |-> !stage)
    else $error("addsub_core: start while busy");
  assert property (@(posedge clk) disable iff (!rst_n) start |-> (a < p && b < p))
    else $error("addsub_core: operand not reduced");

endmodule
