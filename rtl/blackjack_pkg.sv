// blackjack_pkg: shared sizes, instruction encoding and types of the
// BlackJack hardware shuffler.
//
// The shuffler is a CPU functional unit that hands out loop iteration numbers
// in a random order without repeats. Its sizes follow the published design:
// 16 registers ("bins") per set, 4 banks (one per shuffled loop), 10-bit
// count registers. The instruction layout (SHFL_LD / SHFL_GNI) copies the
// bit fields of the published encoding: condition code 1110 in [31:28],
// opcode 0011_0000 in [27:20], bank in [19:18], set in [17], register select
// in [16:10], value in [9:0], destination register in [3:0].
package blackjack_pkg;

  // Design-time sizes (published configuration).
  localparam int unsigned K_DEFAULT      = 16;  // registers (bins) per set
  localparam int unsigned NUM_BANKS_DEF  = 4;   // banks = shuffled loops
  localparam int unsigned VAL_W_DEFAULT  = 10;  // width of a count register

  // Instruction encoding.
  localparam logic [3:0] SHFL_COND   = 4'b1110;      // "always" condition
  localparam logic [7:0] SHFL_OPCODE = 8'b0011_0000;  // unused ARM opcode
  localparam int unsigned REGSEL_W   = 7;             // [16:10]
  localparam int unsigned LDVAL_W    = 10;            // [9:0]
  localparam int unsigned BANKSEL_W  = 2;             // [19:18]
  localparam int unsigned RD_W       = 4;             // [3:0]

  // Which register set a SHFL_LD writes (instruction bit 17).
  typedef enum logic {
    SET_CURRENT = 1'b0,
    SET_MAX     = 1'b1
  } set_e;

  // Kind of shuffler instruction, as told by the core's decoder.
  typedef enum logic {
    OP_LD  = 1'b0,
    OP_GNI = 1'b1
  } shfl_op_e;

  // Fields of a decoded shuffler instruction.
  typedef struct packed {
    logic                  valid;   // condition and opcode match, op issued
    shfl_op_e              op;
    logic [BANKSEL_W-1:0]  bank;
    set_e                  set;
    logic [REGSEL_W-1:0]   regsel;
    logic [LDVAL_W-1:0]    value;
    logic [RD_W-1:0]       rd;
  } shfl_instr_t;

  // SHFL_LD instruction word.
  function automatic logic [31:0] enc_ld(logic [1:0] bank, set_e set,
                                         logic [REGSEL_W-1:0] regsel,
                                         logic [LDVAL_W-1:0] value);
    return {SHFL_COND, SHFL_OPCODE, bank, logic'(set), regsel, value};
  endfunction

  // SHFL_GNI instruction word.
  function automatic logic [31:0] enc_gni(logic [1:0] bank, logic [RD_W-1:0] rd);
    return {SHFL_COND, SHFL_OPCODE, bank, 14'd0, rd};
  endfunction

endpackage
