// tb_ipif_regs: bus writes and read-back of Data_in and Ins, the one-cycle
// ins_new pulse on every Ins write (and only then), user-logic writes of
// Data_out and that the processor cannot overwrite Data_out.
module tb_ipif_regs;
  import pairing_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic bus_wr = 1'b0, bus_rd = 1'b0, dout_we = 1'b0;
  logic [1:0] bus_addr = '0;
  logic [31:0] bus_wdata = '0, bus_rdata, data_in, ins, dout_d = '0;
  logic ins_new;
  int checks = 0, failures = 0, pulses = 0;

  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n && ins_new) pulses++;

  ipif_regs #(.W(32)) dut (.*);

  task automatic chk(input bit ok, input string m);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", m); end
  endtask

  task automatic bwrite(input logic [1:0] ad, input logic [31:0] d);
    @(negedge clk) begin bus_wr = 1'b1; bus_addr = ad; bus_wdata = d; end
    @(negedge clk) bus_wr = 1'b0;
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
    for (int k = 0; k < 20; k++) begin
      v = $urandom;
      bwrite(REG_DATAIN, v);
      chk(data_in == v, "data_in");
      bus_addr = REG_DATAIN; #1;
      chk(bus_rdata == v, "read data_in");
      chk(!ins_new, "no pulse on data write");
      v = $urandom;
      bwrite(REG_INS, v);        // ins_new is high for the cycle after the write
      chk(ins == v && ins_new, "ins");
      @(negedge clk);
      chk(!ins_new, "ins_new lasts one cycle");
      bus_addr = REG_INS; #1;
      chk(bus_rdata == v, "read ins");
      v = $urandom;
      @(negedge clk) begin dout_we = 1'b1; dout_d = v; end
      @(negedge clk) dout_we = 1'b0;
      bus_addr = REG_DATAOUT; #1;
      chk(bus_rdata == v, "data_out");
      bwrite(REG_DATAOUT, ~v);
      bus_addr = REG_DATAOUT; #1;
      chk(bus_rdata == v, "data_out not bus-writable");
    end
    if (pulses != 20) $display("ins_new pulses: %0d", pulses);
    chk(pulses == 20, "one ins_new per Ins write");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
