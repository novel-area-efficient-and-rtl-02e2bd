// tb_addsub_core: self-checking test of the F_p adder/subtractor against wide
// reference arithmetic, including the wrap-around corners (a+b = p, a-b < 0),
// with a latency check (done on the edge after the one that samples start).
module tb_addsub_core;
  import tb_bn_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, sub = 1'b0;
  fe_t a, b, p, r;
  logic busy, done;
  int checks = 0, failures = 0;
  int n_wrap_add = 0, n_wrap_sub = 0;

  always #5 clk = ~clk;

  addsub_core #(.FW(256)) dut (.*);

  task automatic run(input fe_t x, input fe_t y, input logic s);
    int cyc;
    fe_t exp;
    a = x; b = y; sub = s;
    @(negedge clk) start = 1'b1;
    @(negedge clk) start = 1'b0;
    cyc = 0;
    while (!done) begin @(negedge clk); cyc++; end
    exp = s ? sub_mod(x, y, p) : add_mod(x, y, p);
    if (!s && ({1'b0, x} + {1'b0, y}) >= {1'b0, p}) n_wrap_add++;
    if (s && x < y) n_wrap_sub++;
    checks += 2;
    if (r !== exp) begin
      failures++;
      $display("FAIL %s a=%h b=%h r=%h exp=%h", s ? "sub" : "add", x, y, r, exp);
    end
    if (cyc != 1) begin
      failures++;
      $display("FAIL latency %0d", cyc);
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    p = bn_p();
    a = '0; b = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run(0, 0, 0);
    run(0, 0, 1);
    run(p - 1, 1, 0);      // sum equals p
    run(p - 1, p - 1, 0);
    run(0, 1, 1);          // borrow
    run(5, 5, 1);
    run(0, p - 1, 1);
    for (int k = 0; k < 300; k++) run(rand_fe(p), rand_fe(p), k[0]);
    checks++;
    if (n_wrap_add == 0 || n_wrap_sub == 0) begin
      failures++;
      $display("FAIL corrections not exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
