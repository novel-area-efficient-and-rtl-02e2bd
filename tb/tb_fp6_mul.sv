// tb_fp6_mul: workload test. Multiplies random elements of
// F_p6 = F_p2[v]/(v^3 - xi), xi = mu, with the Karatsuba-style F_p6
// algorithm split between "software" and the peripheral, as on the slave
// processor: the six F_p2 products and the two multiplications by xi run on
// the peripheral (EXEC MUL / EXEC RED through the register port), the F_p2
// additions and subtractions are done by the testbench in place of the
// processor. The result is checked against a schoolbook F_p6 product computed
// with wide reference arithmetic (Montgomery reduction by R^-1 mod p obtained
// from Fermat's little theorem), and the operation counts against the
// expected 6 F_p2 products and 2 reductions per F_p6 product.
module tb_fp6_mul;
  import tb_bn_pkg::*;
  import pairing_pkg::*;

  localparam int NTRIALS = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  logic bus_wr = 1'b0, bus_rd = 1'b0;
  logic [1:0] bus_addr = '0;
  logic [31:0] bus_wdata = '0, bus_rdata;
  logic core_busy;
  int checks = 0, failures = 0;
  int n_mul = 0, n_red = 0;

  always #5 clk = ~clk;

  karatsuba_plb_ip dut (.*);

  `include "plb_host_tasks.svh"

  typedef struct { fe_t c0; fe_t c1; } fp2_t;
  fe_t p, rr, rinv;

  // ---------- reference (Montgomery domain, wide arithmetic) ----------
  function automatic fe_t mont(input fe_t a, input fe_t b);
    return mul_mod(mul_mod(a, b, p), rinv, p);
  endfunction
  function automatic fp2_t f2add(input fp2_t a, input fp2_t b);
    return '{add_mod(a.c0, b.c0, p), add_mod(a.c1, b.c1, p)};
  endfunction
  function automatic fp2_t f2sub(input fp2_t a, input fp2_t b);
    return '{sub_mod(a.c0, b.c0, p), sub_mod(a.c1, b.c1, p)};
  endfunction
  function automatic fp2_t f2mul_ref(input fp2_t a, input fp2_t b);
    fe_t t0, t1;
    t0 = mont(a.c0, b.c0);
    t1 = mont(a.c1, b.c1);
    return '{sub_mod(t0, mul_mod(5, t1, p), p),
             add_mod(mont(a.c0, b.c1), mont(a.c1, b.c0), p)};
  endfunction
  function automatic fp2_t f2xi_ref(input fp2_t a);   // (a0 + a1 mu) mu
    return '{sub_mod(0, mul_mod(5, a.c1, p), p), a.c0};
  endfunction

  // ---------- peripheral calls ----------
  task automatic hw_mul(input fp2_t a, input fp2_t b, output fp2_t c);
    load_fe(SLOT_A0, a.c0); load_fe(SLOT_A1, a.c1);
    load_fe(SLOT_B0, b.c0); load_fe(SLOT_B1, b.c1);
    exec_op(OP_MUL);
    wait_idle();
    read_fe(SLOT_C0, c.c0); read_fe(SLOT_C1, c.c1);
    n_mul++;
  endtask
  task automatic hw_red(input fp2_t a, output fp2_t c);
    load_fe(SLOT_A0, a.c0); load_fe(SLOT_A1, a.c1);
    exec_op(OP_RED);
    wait_idle();
    read_fe(SLOT_C0, c.c0); read_fe(SLOT_C1, c.c1);
    n_red++;
  endtask

  function automatic fp2_t rand_fp2();
    return '{rand_fe(p), rand_fe(p)};
  endfunction

  initial begin
    #200000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fp2_t a[3], b[3], c[3], e[3], t0, t1, t2, u, v;
    p = bn_p();
    rr = r_mod_p(p);
    rinv = rinv_mod_p(p);
    checks++;
    if (mul_mod(rr, rinv, p) != 1) begin failures++; $display("FAIL R^-1"); end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    load_curve(p, neg_inv32(p[31:0]), mul_mod(5, rr, p));
    for (int trial = 0; trial < NTRIALS; trial++) begin
      n_mul = 0; n_red = 0;
      for (int k = 0; k < 3; k++) begin a[k] = rand_fp2(); b[k] = rand_fp2(); end
      // F_p6 multiplication, Karatsuba style (3 products + 3 cross products)
      hw_mul(a[0], b[0], t0);
      hw_mul(a[1], b[1], t1);
      hw_mul(a[2], b[2], t2);
      hw_mul(f2add(a[1], a[2]), f2add(b[1], b[2]), u);
      u = f2sub(f2sub(u, t1), t2);
      hw_red(u, u);
      c[0] = f2add(u, t0);
      hw_mul(f2add(a[0], a[1]), f2add(b[0], b[1]), u);
      hw_red(t2, v);
      c[1] = f2add(f2sub(f2sub(u, t0), t1), v);
      hw_mul(f2add(a[0], a[2]), f2add(b[0], b[2]), u);
      c[2] = f2add(f2sub(f2sub(u, t0), t2), t1);
      // schoolbook reference
      e[0] = f2add(f2mul_ref(a[0], b[0]),
                   f2xi_ref(f2add(f2mul_ref(a[1], b[2]), f2mul_ref(a[2], b[1]))));
      e[1] = f2add(f2add(f2mul_ref(a[0], b[1]), f2mul_ref(a[1], b[0])),
                   f2xi_ref(f2mul_ref(a[2], b[2])));
      e[2] = f2add(f2add(f2mul_ref(a[0], b[2]), f2mul_ref(a[1], b[1])),
                   f2mul_ref(a[2], b[0]));
      for (int k = 0; k < 3; k++) begin
        checks++;
        if (c[k].c0 != e[k].c0 || c[k].c1 != e[k].c1) begin
          failures++;
          $display("FAIL trial %0d coefficient %0d", trial, k);
        end
      end
      checks++;
      if (n_mul != 6 || n_red != 2) begin
        failures++;
        $display("FAIL operation count mul=%0d red=%0d", n_mul, n_red);
      end
    end
    $display("F_p6 products: %0d, each 6 F_p2 products + 2 reductions on the peripheral", NTRIALS);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
