// memory_unit: operand and result store of the peripheral (the Memory Unit).
//
// NSLOTS slots of N words of W bits, addressed by {slot, digit}
// (pairing_pkg::SLOT_*): a0, a1, b0, b1, p, p' (digit 0), RedFp, c0, c1.
// The control unit moves 32-bit words in and out through a single port with
// addr / wea / ena, as in the source's User_Logic diagram; a read returns the
// word on dout one clock edge later. The arithmetic core sees the operand
// slots as whole field elements, and at the end of an operation the core's two
// results are written into slots c0 and c1 in one cycle (res_we).
// The source gives only the unit's role and its ADDR/WEA/ENA controls; the
// slot map, the one-cycle read and the parallel core ports are this design's
// choices (a register array rather than a block RAM, so that the core can read
// whole operands).
module memory_unit
  import pairing_pkg::*;
#(
  parameter int unsigned W = pairing_pkg::WORD_BITS,
  parameter int unsigned N = pairing_pkg::N_DIGITS,
  localparam int unsigned DWL = (N > 1) ? $clog2(N) : 1,   // digit bits
  localparam int unsigned AWL = 4 + DWL                     // address bits
) (
  input  logic           clk,
  input  logic           rst_n,
  // word port (control unit)
  input  logic [AWL-1:0] addr,     // {slot[3:0], digit}
  input  logic           ena,
  input  logic           wea,
  input  logic [W-1:0]   din,
  output logic [W-1:0]   dout,
  // operand ports (arithmetic core)
  output logic [W*N-1:0] a0,
  output logic [W*N-1:0] a1,
  output logic [W*N-1:0] b0,
  output logic [W*N-1:0] b1,
  output logic [W*N-1:0] p,
  output logic [W-1:0]   pinv,
  output logic [W*N-1:0] redfp,
  // result port (arithmetic core)
  input  logic           res_we,
  input  logic [W*N-1:0] c0,
  input  logic [W*N-1:0] c1
);
  logic [W-1:0] mem [NSLOTS][N];

  logic [3:0]    slot;
  logic [DWL-1:0] digit;
  assign slot  = addr[AWL-1:DWL];
  assign digit = addr[DWL-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dout <= '0;
      for (int s = 0; s < NSLOTS; s++)
        for (int d = 0; d < N; d++) mem[s][d] <= '0;
    end else begin
      if (ena && slot < 4'(NSLOTS)) begin
        if (wea) mem[slot][digit] <= din;
        dout <= mem[slot][digit];
      end else if (ena) begin
        dout <= '0;                       // unmapped slot reads as zero
      end
      if (res_we)
        for (int d = 0; d < N; d++) begin
          mem[SLOT_C0][d] <= c0[d*W +: W];
          mem[SLOT_C1][d] <= c1[d*W +: W];
        end
    end
  end

  always_comb
    for (int d = 0; d < N; d++) begin
      a0[d*W +: W]    = mem[SLOT_A0][d];
      a1[d*W +: W]    = mem[SLOT_A1][d];
      b0[d*W +: W]    = mem[SLOT_B0][d];
      b1[d*W +: W]    = mem[SLOT_B1][d];
      p[d*W +: W]     = mem[SLOT_P][d];
      redfp[d*W +: W] = mem[SLOT_REDFP][d];
    end
  assign pinv = mem[SLOT_PINV][0];

endmodule
