// tb_memory_unit: writes every word of every slot through the word port,
// reads them back (one-cycle read latency), checks the wide operand views,
// the result write port and that unmapped slots read as zero.
module tb_memory_unit;
  import pairing_pkg::*;

  localparam int W = 32, N = 8, AWL = 4 + 3;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [AWL-1:0] addr = '0;
  logic ena = 1'b0, wea = 1'b0, res_we = 1'b0;
  logic [W-1:0] din = '0, dout, pinv;
  logic [W*N-1:0] a0, a1, b0, b1, p, redfp, c0 = '0, c1 = '0;
  logic [W-1:0] model [NSLOTS][N];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  memory_unit #(.W(W), .N(N)) dut (.*);

  task automatic chk(input logic [W*N-1:0] got, input int slot, input string nm);
    logic [W*N-1:0] e;
    for (int d = 0; d < N; d++) e[d*W +: W] = model[slot][d];
    checks++;
    if (got !== e) begin failures++; $display("FAIL view %s", nm); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int s = 0; s < NSLOTS; s++)
      for (int d = 0; d < N; d++) begin
        model[s][d] = $urandom;
        @(negedge clk);
        addr = AWL'({s[3:0], d[2:0]}); din = model[s][d]; ena = 1'b1; wea = 1'b1;
      end
    @(negedge clk) begin ena = 1'b0; wea = 1'b0; end
    for (int s = 0; s < NSLOTS; s++)
      for (int d = 0; d < N; d++) begin
        addr = AWL'({s[3:0], d[2:0]}); ena = 1'b1;
        @(negedge clk);
        checks++;
        if (dout !== model[s][d]) begin
          failures++;
          $display("FAIL read slot %0d digit %0d: %h vs %h", s, d, dout, model[s][d]);
        end
      end
    ena = 1'b0;
    chk(a0, SLOT_A0, "a0"); chk(a1, SLOT_A1, "a1");
    chk(b0, SLOT_B0, "b0"); chk(b1, SLOT_B1, "b1");
    chk(p, SLOT_P, "p"); chk(redfp, SLOT_REDFP, "redfp");
    checks++;
    if (pinv !== model[SLOT_PINV][0]) begin failures++; $display("FAIL pinv"); end
    // result port
    for (int d = 0; d < N; d++) begin
      model[SLOT_C0][d] = $urandom; model[SLOT_C1][d] = $urandom;
      c0[d*W +: W] = model[SLOT_C0][d]; c1[d*W +: W] = model[SLOT_C1][d];
    end
    res_we = 1'b1;
    @(negedge clk) res_we = 1'b0;
    for (int d = 0; d < N; d++) begin
      addr = AWL'({4'(SLOT_C1), d[2:0]}); ena = 1'b1;
      @(negedge clk);
      checks++;
      if (dout !== model[SLOT_C1][d]) begin failures++; $display("FAIL result c1 %0d", d); end
      addr = AWL'({4'(SLOT_C0), d[2:0]});
      @(negedge clk);
      checks++;
      if (dout !== model[SLOT_C0][d]) begin failures++; $display("FAIL result c0 %0d", d); end
    end
    addr = AWL'({4'd12, 3'd1}); ena = 1'b1;
    @(negedge clk);
    checks++;
    if (dout !== '0) begin failures++; $display("FAIL unmapped slot"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
