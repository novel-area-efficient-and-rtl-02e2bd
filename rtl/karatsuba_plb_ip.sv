// karatsuba_plb_ip: the complete KARATSUBA peripheral that the slave
// processor drives in the two-processor pairing system: bus registers
// (ipif_regs) plus the user logic made of the memory unit, the control unit
// and the KARATSUBA arithmetic core (one Montgomery multiplier and one
// modular adder/subtractor).
//
// Use from software, per field operation:
//   1. for each operand word: write Data_in, then write Ins = CMD_WRITE with
//      {slot, digit}; p, p' and RedFp are loaded once per curve
//   2. write Ins = CMD_EXEC with the operation in bits [3:0]
//   3. poll with Ins = CMD_STATUS and read Data_out until bit 0 (busy) is 0
//   4. for each result word: write Ins = CMD_READ, wait one cycle, read Data_out
// All field elements are in Montgomery form with R = 2^(W*N).
//
// The structure (registers, memory unit, control unit, core) follows the
// source's peripheral diagram; the bus is a plain register port standing in
// for the vendor's PLB/IPIF, and the instruction set is this design's own.
module karatsuba_plb_ip
  import pairing_pkg::*;
#(
  parameter int unsigned W = pairing_pkg::WORD_BITS,
  parameter int unsigned N = pairing_pkg::N_DIGITS
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         bus_wr,
  input  logic         bus_rd,
  input  logic [1:0]   bus_addr,
  input  logic [W-1:0] bus_wdata,
  output logic [W-1:0] bus_rdata,
  output logic         core_busy      // also visible in the status word
);
  localparam int unsigned DWL = (N > 1) ? $clog2(N) : 1;
  localparam int unsigned AWL = 4 + DWL;

  logic [W-1:0]   data_in, ins, dout_d, mu_din, mu_dout;
  logic           ins_new, dout_we, mu_ena, mu_wea, mu_res_we;
  logic [AWL-1:0] mu_addr;
  logic           core_start, core_done;
  kop_e           core_op;
  logic [W*N-1:0] a0, a1, b0, b1, p, redfp, c0, c1;
  logic [W-1:0]   pinv;

  ipif_regs #(.W(W)) u_ipif (
    .clk, .rst_n, .bus_wr, .bus_rd, .bus_addr, .bus_wdata, .bus_rdata,
    .data_in, .ins, .ins_new, .dout_we, .dout_d);

  control_unit #(.W(W), .N(N)) u_cu (
    .clk, .rst_n, .ins, .ins_new, .data_in, .dout_we, .dout_d,
    .mu_addr, .mu_ena, .mu_wea, .mu_din, .mu_dout, .mu_res_we,
    .core_start, .core_op, .core_busy, .core_done);

  memory_unit #(.W(W), .N(N)) u_mu (
    .clk, .rst_n, .addr(mu_addr), .ena(mu_ena), .wea(mu_wea), .din(mu_din),
    .dout(mu_dout), .a0, .a1, .b0, .b1, .p, .pinv, .redfp,
    .res_we(mu_res_we), .c0, .c1);

  karatsuba_core #(.W(W), .N(N)) u_core (
    .clk, .rst_n, .start(core_start), .op(core_op), .a0, .a1, .b0, .b1, .p,
    .pinv, .redfp, .c0, .c1, .busy(core_busy), .done(core_done));

endmodule
