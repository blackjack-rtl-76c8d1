// shfl_decoder: field decoder for the two shuffler instructions.
//
// SHFL_LD and SHFL_GNI share one 32-bit layout:
//   [31:28] condition code, must be 1110 ("always")
//   [27:20] opcode 0011_0000 (an opcode the base ARM ISA leaves unused)
//   [19:18] bank select
//   [17]    set select, SHFL_LD only (0 current count, 1 max count)
//   [16:10] register select within the set, SHFL_LD only
//   [9:0]   value to load, SHFL_LD only
//   [3:0]   destination CPU register (Rd), SHFL_GNI only
// The published encodings of the two instructions carry the same condition
// and opcode bits, so the word itself does not tell them apart. In this
// design the host core's decoder says which one it issued (`is_gni`); that
// signal is this design's choice. The field positions follow the published
// encoding. Purely combinational: `dec.valid` is high when an instruction is
// issued and its condition and opcode match.
module shfl_decoder
  import blackjack_pkg::*;
(
  input  logic        instr_valid,
  input  logic        is_gni,
  input  logic [31:0] instr,
  output shfl_instr_t dec
);

  always_comb begin
    dec.valid  = instr_valid && (instr[31:28] == SHFL_COND)
                             && (instr[27:20] == SHFL_OPCODE);
    dec.op     = is_gni ? OP_GNI : OP_LD;
    dec.bank   = instr[19:18];
    dec.set    = set_e'(instr[17]);
    dec.regsel = instr[16:10];
    dec.value  = instr[9:0];
    dec.rd     = instr[3:0];
  end

endmodule
