// tb_karatsuba_core: self-checking test of the F_p2 unit. For each operation
// the results are checked in the Montgomery domain against wide reference
// arithmetic modulo the BN prime (beta = -5, RedFp = 5R mod p):
//   MUL  c0*R = a0b0 - 5 a1b1,  c1*R = a0b1 + a1b0
//   SQR  the same with b = a
//   MULC c0*R = a0b0, c1*R = a1b0
//   RED  c0 = -5 a1, c1 = a0
//   MMM  c0*R = a0b0
// and every latency is checked against the step schedule
// (4 multiplier passes + 3 add/sub passes for a product).
module tb_karatsuba_core;
  import tb_bn_pkg::*;
  import pairing_pkg::*;

  localparam int LM = 97, LA = 1;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  kop_e op;
  fe_t a0, a1, b0, b1, p, redfp, c0, c1;
  logic [31:0] pinv;
  logic busy, done;
  int checks = 0, failures = 0;
  int n_op[5];

  always #5 clk = ~clk;

  karatsuba_core #(.W(32), .N(8)) dut (.*);

  function automatic int exp_lat(input kop_e o);
    case (o)
      OP_MUL, OP_SQR: return 4 * (LM + 2) + 3 * (LA + 2);
      OP_MULC:        return 2 * (LM + 2);
      OP_RED:         return (LM + 2) + (LA + 2);
      default:        return LM + 2;
    endcase
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s op=%s a0=%h a1=%h b0=%h b1=%h c0=%h c1=%h",
               what, op.name(), a0, a1, b0, b1, c0, c1);
    end
  endtask

  task automatic run(input kop_e o);
    int cyc;
    fe_t rr, x0, x1, y0, y1, e0, e1;
    op = o;
    @(negedge clk) start = 1'b1;
    @(negedge clk) start = 1'b0;
    cyc = 0;
    while (!done) begin @(negedge clk); cyc++; end
    n_op[o]++;
    rr = r_mod_p(p);
    x0 = a0; x1 = a1;
    y0 = (o == OP_SQR) ? a0 : b0;
    y1 = (o == OP_SQR) ? a1 : b1;
    check(c0 < p && c1 < p, "range");
    case (o)
      OP_MUL, OP_SQR: begin
        e0 = sub_mod(mul_mod(x0, y0, p), mul_mod(5, mul_mod(x1, y1, p), p), p);
        e1 = add_mod(mul_mod(x0, y1, p), mul_mod(x1, y0, p), p);
        check(mul_mod(c0, rr, p) == e0, "c0");
        check(mul_mod(c1, rr, p) == e1, "c1");
      end
      OP_MULC: begin
        check(mul_mod(c0, rr, p) == mul_mod(x0, y0, p), "c0");
        check(mul_mod(c1, rr, p) == mul_mod(x1, y0, p), "c1");
      end
      OP_RED: begin
        check(c0 == sub_mod(0, mul_mod(5, x1, p), p), "c0");
        check(c1 == x0, "c1");
      end
      default: check(mul_mod(c0, rr, p) == mul_mod(x0, y0, p), "c0");
    endcase
    checks++;
    if (cyc != exp_lat(o)) begin
      failures++;
      $display("FAIL latency op=%s %0d expected %0d", o.name(), cyc, exp_lat(o));
    end
  endtask

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    p = bn_p();
    pinv = neg_inv32(p[31:0]);
    redfp = mul_mod(5, r_mod_p(p), p);
    a0 = 0; a1 = 0; b0 = 0; b1 = 0; op = OP_MMM;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // corners
    a0 = p - 1; a1 = p - 1; b0 = p - 1; b1 = p - 1;
    run(OP_MUL);
    a0 = 0; a1 = 1; b0 = 0; b1 = 1;
    run(OP_MUL);
    run(OP_RED);
    for (int k = 0; k < 40; k++) begin
      a0 = rand_fe(p); a1 = rand_fe(p); b0 = rand_fe(p); b1 = rand_fe(p);
      run(kop_e'(k % 5));
    end
    $display("ops: MMM=%0d MUL=%0d SQR=%0d MULC=%0d RED=%0d",
             n_op[0], n_op[1], n_op[2], n_op[3], n_op[4]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
