// plb_host_tasks.svh: processor-side driver tasks for the peripheral's
// register port, included inside a testbench module that declares clk,
// bus_wr, bus_rd, bus_addr, bus_wdata and bus_rdata. They play the part of
// the slave processor's software: load operands word by word, start an
// operation, poll the status word and read results back.

int n_busy_polls = 0;   // status reads that found the core busy

task automatic bus_write(input logic [1:0] ad, input logic [31:0] d);
  @(negedge clk) begin bus_wr = 1'b1; bus_rd = 1'b0; bus_addr = ad; bus_wdata = d; end
  @(negedge clk) bus_wr = 1'b0;
endtask

task automatic bus_read(input logic [1:0] ad, output logic [31:0] d);
  @(negedge clk) begin bus_rd = 1'b1; bus_addr = ad; end
  #1 d = bus_rdata;
  @(negedge clk) bus_rd = 1'b0;
endtask

function automatic logic [31:0] ins_word(input pairing_pkg::cmd_e c, input int slot,
                                         input int dig, input int op);
  pairing_pkg::ins_t i;
  i = '0; i.cmd = c; i.slot = 4'(slot); i.digit = 4'(dig); i.op = 4'(op);
  return i;
endfunction

task automatic load_fe(input int slot, input logic [255:0] v);
  for (int d = 0; d < 8; d++) begin
    bus_write(pairing_pkg::REG_DATAIN, v[d*32 +: 32]);
    bus_write(pairing_pkg::REG_INS, ins_word(pairing_pkg::CMD_WRITE, slot, d, 0));
  end
endtask

task automatic read_fe(input int slot, output logic [255:0] v);
  logic [31:0] w;
  for (int d = 0; d < 8; d++) begin
    bus_write(pairing_pkg::REG_INS, ins_word(pairing_pkg::CMD_READ, slot, d, 0));
    @(negedge clk);                       // memory read, then Data_out update
    bus_read(pairing_pkg::REG_DATAOUT, w);
    v[d*32 +: 32] = w;
  end
endtask

task automatic read_status(output logic [31:0] st);
  bus_write(pairing_pkg::REG_INS, ins_word(pairing_pkg::CMD_STATUS, 0, 0, 0));
  bus_read(pairing_pkg::REG_DATAOUT, st);
endtask

task automatic exec_op(input int op);
  bus_write(pairing_pkg::REG_INS, ins_word(pairing_pkg::CMD_EXEC, 0, 0, op));
endtask

task automatic wait_idle();
  logic [31:0] st;
  read_status(st);
  while (st[0]) begin
    n_busy_polls++;
    repeat (20) @(negedge clk);
    read_status(st);
  end
endtask

// p, p' and RedFp for the curve, loaded once
task automatic load_curve(input logic [255:0] p, input logic [31:0] pinv,
                          input logic [255:0] redfp);
  load_fe(pairing_pkg::SLOT_P, p);
  load_fe(pairing_pkg::SLOT_PINV, {224'd0, pinv});
  load_fe(pairing_pkg::SLOT_REDFP, redfp);
endtask
