// tb_karatsuba_plb_ip: end-to-end test of the whole peripheral at its default
// size (32-bit digits, 256-bit field elements), driven only through the
// register port the way the slave processor's software drives it. It loads
// the BN-curve constants, runs every core operation on random operands and
// checks the results read back against wide reference arithmetic. It also
// makes each protocol mechanism happen and counts it: operand loading while
// the core is busy, status polls that find the core busy, an EXEC dropped
// because the core was busy (overrun flag), an EXEC with an unknown
// operation (illegal flag), and the completed-operation counter.
module tb_karatsuba_plb_ip;
  import tb_bn_pkg::*;
  import pairing_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic bus_wr = 1'b0, bus_rd = 1'b0;
  logic [1:0] bus_addr = '0;
  logic [31:0] bus_wdata = '0, bus_rdata;
  logic core_busy;
  int checks = 0, failures = 0;
  int n_op[5], n_overlap_load = 0, n_overrun = 0, n_illegal = 0;

  always #5 clk = ~clk;

  karatsuba_plb_ip dut (.*);

  `include "plb_host_tasks.svh"

  task automatic chk(input bit ok, input string m);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", m); end
  endtask

  fe_t p, redfp, rr;

  // check the c0/c1 slots for operation o on operands x (a) and y (b)
  task automatic check_result(input kop_e o, input fe_t x0, input fe_t x1,
                              input fe_t y0, input fe_t y1);
    fe_t c0, c1;
    read_fe(SLOT_C0, c0);
    read_fe(SLOT_C1, c1);
    if (o == OP_SQR) begin y0 = x0; y1 = x1; end
    chk(c0 < p, "c0 range");
    unique case (o)
      OP_MUL, OP_SQR: begin
        chk(mul_mod(c0, rr, p) == sub_mod(mul_mod(x0, y0, p), mul_mod(5, mul_mod(x1, y1, p), p), p),
            $sformatf("%s c0", o.name()));
        chk(mul_mod(c1, rr, p) == add_mod(mul_mod(x0, y1, p), mul_mod(x1, y0, p), p),
            $sformatf("%s c1", o.name()));
      end
      OP_MULC: begin
        chk(mul_mod(c0, rr, p) == mul_mod(x0, y0, p), "MULC c0");
        chk(mul_mod(c1, rr, p) == mul_mod(x1, y0, p), "MULC c1");
      end
      OP_RED: begin
        chk(c0 == sub_mod(0, mul_mod(5, x1, p), p), "RED c0");
        chk(c1 == x0, "RED c1");
      end
      default: chk(mul_mod(c0, rr, p) == mul_mod(x0, y0, p), "MMM c0");
    endcase
    n_op[o]++;
  endtask

  initial begin
    #50000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fe_t x0, x1, y0, y1, nx0, nx1, ny0, ny1;
    logic [31:0] st;
    kop_e o;
    p = bn_p();
    rr = r_mod_p(p);
    redfp = mul_mod(5, rr, p);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    load_curve(p, neg_inv32(p[31:0]), redfp);

    x0 = rand_fe(p); x1 = rand_fe(p); y0 = rand_fe(p); y1 = rand_fe(p);
    load_fe(SLOT_A0, x0); load_fe(SLOT_A1, x1); load_fe(SLOT_B0, y0); load_fe(SLOT_B1, y1);
    for (int k = 0; k < 15; k++) begin
      o = kop_e'(k % 5);
      exec_op(o);
      if (k == 3) begin
        // a second EXEC while the core works is dropped and flagged
        exec_op(OP_MUL);
        read_status(st);
        chk(st[0] && st[1], "overrun flagged");
        if (st[1]) n_overrun++;
      end
      // load the next operands while the core is busy (it latched its own)
      nx0 = rand_fe(p); nx1 = rand_fe(p); ny0 = rand_fe(p); ny1 = rand_fe(p);
      if (k == 7) begin nx0 = p - 1; nx1 = p - 1; ny0 = p - 1; ny1 = p - 1; end
      if (k == 8) begin nx0 = 0; nx1 = 1; ny0 = 0; ny1 = 1; end
      load_fe(SLOT_A0, nx0);
      if (core_busy) n_overlap_load++;     // the whole load happened during the operation
      wait_idle();
      check_result(o, x0, x1, y0, y1);
      load_fe(SLOT_A1, nx1); load_fe(SLOT_B0, ny0); load_fe(SLOT_B1, ny1);
      x0 = nx0; x1 = nx1; y0 = ny0; y1 = ny1;
    end
    // unknown operation
    exec_op(9);
    read_status(st);
    chk(!st[0] && st[2], "illegal op flagged");
    if (st[2]) n_illegal++;
    read_status(st);
    chk(st[2:0] == 3'b000, "sticky flags cleared by status read");
    chk(st[31:16] == 16'd15, "completed-operation counter");

    $display("ops MMM=%0d MUL=%0d SQR=%0d MULC=%0d RED=%0d overlap_loads=%0d busy_polls=%0d overrun=%0d illegal=%0d",
             n_op[0], n_op[1], n_op[2], n_op[3], n_op[4], n_overlap_load, n_busy_polls,
             n_overrun, n_illegal);
    for (int k = 0; k < 5; k++) chk(n_op[k] > 0, "every operation exercised");
    chk(n_overlap_load > 0, "operand load during computation exercised");
    chk(n_busy_polls > 0, "busy status poll exercised");
    chk(n_overrun > 0 && n_illegal > 0, "error flags exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
