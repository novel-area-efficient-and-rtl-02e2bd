// pairing_pkg: shared sizes, opcodes and instruction format of the F_p / F_p2
// arithmetic peripheral (MMM, ADD/SUB and KARATSUBA cores behind a register
// interface).
//
// Sizes: operands are 256-bit field elements split into eight 32-bit digits,
// the digit size and operand width printed in the Montgomery multiplier and
// KARATSUBA block diagrams. The opcode values, the instruction word layout and
// the memory-unit slot map are this design's own choices: the source only says
// that the processor writes instruction codes into an instruction register.
package pairing_pkg;

  // Digit width (radix 2^32) and number of digits of an F_p element.
  localparam int unsigned WORD_BITS  = 32;
  localparam int unsigned N_DIGITS   = 8;
  localparam int unsigned FIELD_BITS = WORD_BITS * N_DIGITS;  // 256-bit element

  // Operations of the KARATSUBA core.
  typedef enum logic [3:0] {
    OP_MMM  = 4'd0,  // c0 = Mont(a0, b0)                  (F_p multiplication)
    OP_MUL  = 4'd1,  // c = a * b in F_p2 (Karatsuba)
    OP_SQR  = 4'd2,  // c = a * a in F_p2 (Karatsuba with b = a)
    OP_MULC = 4'd3,  // c = (Mont(a0,b0), Mont(a1,b0))    (times an F_p constant)
    OP_RED  = 4'd4   // c = a * xi, xi = mu, mu^2 = -5     (F_p2 "reduction")
  } kop_e;

  // Commands carried in bits [31:28] of the instruction register.
  typedef enum logic [3:0] {
    CMD_NOP    = 4'd0,
    CMD_WRITE  = 4'd1,  // MU[addr] <- DataIn_reg
    CMD_READ   = 4'd2,  // DataOut_reg <- MU[addr]
    CMD_EXEC   = 4'd3,  // start core operation ins[3:0]
    CMD_STATUS = 4'd4   // DataOut_reg <- status word
  } cmd_e;

  // Memory-unit slots, N digits each. Address = {slot, digit}.
  localparam int unsigned NSLOTS = 9;
  localparam int unsigned SLOT_A0 = 0, SLOT_A1 = 1, SLOT_B0 = 2, SLOT_B1 = 3,
                          SLOT_P = 4, SLOT_PINV = 5, SLOT_REDFP = 6,
                          SLOT_C0 = 7, SLOT_C1 = 8;

  // Instruction register layout.
  typedef struct packed {
    cmd_e        cmd;      // [31:28]
    logic [15:0] unused;   // [27:12]
    logic [3:0]  slot;     // [11:8]
    logic [3:0]  digit;    // [7:4]
    logic [3:0]  op;       // [3:0]  core operation for CMD_EXEC
  } ins_t;

  // Register bus offsets (word addresses) of the three IPIF registers.
  localparam logic [1:0] REG_DATAIN = 2'd0, REG_INS = 2'd1, REG_DATAOUT = 2'd2;

endpackage
