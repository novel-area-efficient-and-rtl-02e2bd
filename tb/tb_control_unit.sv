// tb_control_unit: drives instructions straight into the control unit and
// checks, cycle by cycle, the memory-unit controls for WRITE and READ, the
// Data_out update one cycle after a READ, the core start for EXEC, the
// dropped EXEC while busy or with an unknown operation (status bits 1, 2),
// the completed-operation counter, and the result write-back on core_done.
module tb_control_unit;
  import pairing_pkg::*;

  localparam int W = 32, N = 8, AWL = 7;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [W-1:0] ins = '0, data_in = '0, mu_dout = '0;
  logic ins_new = 1'b0, core_busy = 1'b0, core_done = 1'b0;
  logic dout_we, mu_ena, mu_wea, mu_res_we, core_start;
  logic [W-1:0] dout_d, mu_din;
  logic [AWL-1:0] mu_addr;
  kop_e core_op;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  control_unit #(.W(W), .N(N)) dut (.*);

  task automatic chk(input bit ok, input string m);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", m); end
  endtask

  function automatic logic [31:0] mk_ins(input cmd_e c, input int slot, input int dig, input int op);
    ins_t i;
    i = '0; i.cmd = c; i.slot = 4'(slot); i.digit = 4'(dig); i.op = 4'(op);
    return i;
  endfunction

  // present one instruction for one cycle; sample outputs in that cycle
  task automatic issue(input logic [31:0] word);
    @(negedge clk) begin ins = word; ins_new = 1'b1; end
    #1;
  endtask

  task automatic idle();
    @(negedge clk) ins_new = 1'b0;
    #1;
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] v;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // WRITE
    for (int k = 0; k < 10; k++) begin
      v = $urandom; data_in = v;
      issue(mk_ins(CMD_WRITE, k % NSLOTS, k % N, 0));
      chk(mu_ena && mu_wea && mu_din == v && mu_addr == AWL'({4'(k % NSLOTS), 3'(k % N)}),
          "write controls");
      chk(!core_start && !dout_we, "write side effects");
      idle();
      chk(!mu_ena && !mu_wea, "write lasts one cycle");
    end
    // READ
    for (int k = 0; k < 10; k++) begin
      issue(mk_ins(CMD_READ, SLOT_C0 + k % 2, k % N, 0));
      chk(mu_ena && !mu_wea && mu_addr == AWL'({4'(SLOT_C0 + k % 2), 3'(k % N)}), "read controls");
      v = $urandom;
      @(negedge clk) begin ins_new = 1'b0; mu_dout = v; end
      #1;
      chk(dout_we && dout_d == v, "read data to Data_out");
      idle();
      chk(!dout_we, "read done");
    end
    // EXEC on an idle core
    issue(mk_ins(CMD_EXEC, 0, 0, OP_MUL));
    chk(core_start && core_op == OP_MUL, "exec start");
    @(negedge clk) begin ins_new = 1'b0; core_busy = 1'b1; end
    // EXEC while busy is dropped
    issue(mk_ins(CMD_EXEC, 0, 0, OP_SQR));
    chk(!core_start, "exec while busy dropped");
    idle();
    issue(mk_ins(CMD_STATUS, 0, 0, 0));
    chk(dout_we && dout_d[0] && dout_d[1] && !dout_d[2] && dout_d[31:16] == 0, "status busy+overrun");
    idle();
    // completion
    @(negedge clk) begin core_busy = 1'b0; core_done = 1'b1; end
    #1 chk(mu_res_we, "result write-back");
    @(negedge clk) core_done = 1'b0;
    #1 chk(!mu_res_we, "write-back one cycle");
    issue(mk_ins(CMD_STATUS, 0, 0, 0));
    chk(dout_we && dout_d == 32'h0001_0000, "status after completion, sticky bits cleared");
    idle();
    // unknown operation
    issue(mk_ins(CMD_EXEC, 0, 0, 9));
    chk(!core_start, "illegal op dropped");
    idle();
    issue(mk_ins(CMD_STATUS, 0, 0, 0));
    chk(dout_we && dout_d == 32'h0001_0004, "status illegal");
    idle();
    // all legal operations start
    for (int o = 0; o <= 4; o++) begin
      issue(mk_ins(CMD_EXEC, 0, 0, o));
      chk(core_start && core_op == kop_e'(o), "exec each op");
      idle();
      @(negedge clk) core_done = 1'b1;
      @(negedge clk) core_done = 1'b0;
    end
    issue(mk_ins(CMD_STATUS, 0, 0, 0));
    chk(dout_d[31:16] == 16'd6, "completion count");
    idle();
    // NOP does nothing
    issue(mk_ins(CMD_NOP, 3, 3, 1));
    chk(!mu_ena && !core_start && !dout_we, "nop");
    idle();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
