// tb_mmm_core: self-checking test of the word-serial Montgomery multiplier.
// Random and corner operands modulo the 254-bit BN prime and modulo random
// odd 255-bit moduli; every result is checked against s*R = a*b (mod p) with
// s < p, computed by wide arithmetic, and every latency against N*(N+4)+1.
module tb_mmm_core;
  import tb_bn_pkg::*;

  localparam int unsigned W = 32, N = 8;
  localparam int unsigned LAT = N * (N + 4) + 1;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  fe_t a, b, p, s;
  logic [31:0] pinv;
  logic busy, done;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  mmm_core #(.W(W), .N(N)) dut (.*);

  task automatic run(input fe_t x, input fe_t y);
    int cyc;
    a = x; b = y;
    @(negedge clk) start = 1'b1;
    @(negedge clk) start = 1'b0;
    cyc = 0;   // counts clock edges after the one that sampled start
    while (!done) begin @(negedge clk); cyc++; end
    checks += 2;
    if (!is_mont(s, x, y, p)) begin
      failures++;
      $display("FAIL mont a=%h b=%h s=%h", x, y, s);
    end
    if (cyc != LAT) begin
      failures++;
      $display("FAIL latency %0d expected %0d", cyc, LAT);
    end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    p = bn_p();
    pinv = neg_inv32(p[31:0]);
    a = '0; b = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run(0, 0);
    run(1, 1);
    run(p - 1, p - 1);
    run(p - 1, 1);
    run(r_mod_p(p), r_mod_p(p));
    for (int k = 0; k < 150; k++) run(rand_fe(p), rand_fe(p));
    // other moduli: the core is not tied to one curve
    for (int m = 0; m < 5; m++) begin
      for (int k = 0; k < 8; k++) p[k*32 +: 32] = $urandom;
      p[255] = 1'b0; p[254] = 1'b1; p[0] = 1'b1;
      pinv = neg_inv32(p[31:0]);
      run(p - 1, p - 2);
      for (int k = 0; k < 20; k++) run(rand_fe(p), rand_fe(p));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
