// ipif_regs: the three software-visible registers of the peripheral
// (Data_in, Ins and Data_out), between the processor bus and the user logic.
//
// In the source the processor reaches the peripheral through the vendor's
// bus interface (PLB and its IPIF), which decodes the bus protocol and exposes
// these registers to the user logic over the IPIC signals. That vendor block
// is not reproduced: here a plain single-cycle register port stands in for
// it (bus_wr / bus_rd with a 2-bit word address, read data combinational from
// the registers). Register map (pairing_pkg::REG_*):
//   0  Data_in   written by the processor, read by the memory unit
//   1  Ins       written by the processor; each write pulses ins_new so that
//                the control unit fetches the instruction
//   2  Data_out  written by the user logic (dout_we), read by the processor
// Every register is W bits wide (32 in the source). A processor write to
// Data_out is ignored.
module ipif_regs
  import pairing_pkg::*;
#(
  parameter int unsigned W = pairing_pkg::WORD_BITS
) (
  input  logic         clk,
  input  logic         rst_n,
  // processor side
  input  logic         bus_wr,
  input  logic         bus_rd,
  input  logic [1:0]   bus_addr,
  input  logic [W-1:0] bus_wdata,
  output logic [W-1:0] bus_rdata,
  // user-logic side (IPIC)
  output logic [W-1:0] data_in,
  output logic [W-1:0] ins,
  output logic         ins_new,
  input  logic         dout_we,
  input  logic [W-1:0] dout_d
);
  logic [W-1:0] data_out;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      data_in  <= '0;
      ins      <= '0;
      ins_new  <= 1'b0;
      data_out <= '0;
    end else begin
      ins_new <= 1'b0;
      if (bus_wr && bus_addr == REG_DATAIN) data_in <= bus_wdata;
      if (bus_wr && bus_addr == REG_INS) begin
        ins     <= bus_wdata;
        ins_new <= 1'b1;
      end
      if (dout_we) data_out <= dout_d;
    end
  end

  always_comb begin
    unique case (bus_addr)
      REG_DATAIN:  bus_rdata = data_in;
      REG_INS:     bus_rdata = ins;
      REG_DATAOUT: bus_rdata = data_out;
      default:     bus_rdata = '0;
    endcase
  end

  // The bus performs one access per cycle.
  assert property (@(posedge clk) disable iff (!rst_n) !(bus_wr && bus_rd))
    else $error("ipif_regs: read and write in the same cycle");

endmodule
