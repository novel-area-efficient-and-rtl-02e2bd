// control_unit: instruction decoder and sequencer of the peripheral
// (the Control Unit).
//
// The processor writes a 32-bit instruction into Ins_reg; ins_new marks each
// write. The unit decodes it (layout pairing_pkg::ins_t) and
//   CMD_WRITE   writes Data_in into memory word {slot, digit}     (1 cycle)
//   CMD_READ    reads memory word {slot, digit} into Data_out     (2 cycles)
//   CMD_EXEC    starts the arithmetic core with operation ins[3:0]
//   CMD_STATUS  copies the status word into Data_out             (1 cycle)
// While the core works the unit keeps serving WRITE/READ/STATUS, so the
// processor can load the next operands or fetch the previous results. When
// the core finishes, the unit writes both results into slots c0/c1 (res_we).
// Status word: bit 0 core busy, bit 1 an EXEC arrived while busy and was
// dropped, bit 2 an EXEC named an unknown operation and was dropped (bits 1
// and 2 are sticky and clear when the status is read), bits [31:16] the
// number of completed operations (wrapping).
// The source gives the unit's role (fetch instructions from Ins_reg, drive
// the memory unit's ADDR/WEA/ENA and the core's control signals); the
// instruction encoding, the status word and the timing are this design's own.
// The memory address, write data, core operation and result-write strobe are
// decoded straight from the instruction and data registers (or from core_done)
// without logic of their own, so a lint tool may list those outputs as mere
// copies of inputs; the enables, strobes and status word are the unit's logic.
module control_unit
  import pairing_pkg::*;
#(
  parameter int unsigned W = pairing_pkg::WORD_BITS,
  parameter int unsigned N = pairing_pkg::N_DIGITS,
  localparam int unsigned DWL = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned AWL = 4 + DWL
) (
  input  logic           clk,
  input  logic           rst_n,
  // IPIF registers
  input  logic [W-1:0]   ins,
  input  logic           ins_new,
  input  logic [W-1:0]   data_in,
  output logic           dout_we,
  output logic [W-1:0]   dout_d,
  // memory unit word port
  output logic [AWL-1:0] mu_addr,
  output logic           mu_ena,
  output logic           mu_wea,
  output logic [W-1:0]   mu_din,
  input  logic [W-1:0]   mu_dout,
  output logic           mu_res_we,
  // arithmetic core
  output logic           core_start,
  output kop_e           core_op,
  input  logic           core_busy,
  input  logic           core_done
);
  ins_t i;
  assign i = ins_t'(ins[31:0]);

  logic        rd_pend;              // READ issued, data arrives next cycle
  logic        overrun, illegal;
  logic [15:0] n_done;

  logic op_ok;
  assign op_ok = i.op <= 4'(OP_RED);

  always_comb begin
    mu_addr    = {i.slot, i.digit[DWL-1:0]};
    mu_din     = data_in;
    mu_ena     = 1'b0;
    mu_wea     = 1'b0;
    core_start = 1'b0;
    core_op    = kop_e'(i.op);
    dout_we    = 1'b0;
    dout_d     = mu_dout;
    if (rd_pend) begin
      dout_we = 1'b1;
      dout_d  = mu_dout;
    end else if (ins_new) begin
      unique case (i.cmd)
        CMD_WRITE:  begin mu_ena = 1'b1; mu_wea = 1'b1; end
        CMD_READ:   mu_ena = 1'b1;
        CMD_EXEC:   core_start = !core_busy && op_ok;
        CMD_STATUS: begin
          dout_we = 1'b1;
          dout_d  = {n_done, 13'd0, illegal, overrun, core_busy};
        end
        default: ;
      endcase
    end
  end

  assign mu_res_we = core_done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_pend <= 1'b0;
      overrun <= 1'b0;
      illegal <= 1'b0;
      n_done  <= '0;
    end else begin
      rd_pend <= ins_new && !rd_pend && i.cmd == CMD_READ;
      if (core_done) n_done <= n_done + 1'b1;
      if (ins_new && !rd_pend && i.cmd == CMD_STATUS) begin
        overrun <= 1'b0;
        illegal <= 1'b0;
      end
      if (ins_new && !rd_pend && i.cmd == CMD_EXEC) begin
        if (core_busy) overrun <= 1'b1;
        else if (!op_ok) illegal <= 1'b1;
      end
    end
  end

  // Software must leave one idle cycle after a READ before the next
  // instruction; an instruction arriving then would be lost.
  assert property (@(posedge clk) disable iff (!rst_n) rd_pend |-> !ins_new)
    else $error("control_unit: instruction during READ");

endmodule
