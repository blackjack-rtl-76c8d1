// blackjack: shuffling functional unit of an IoT CPU core (top level).
//
// The unit gives software a random, repeat-free order for the iterations of
// up to NUM_BANKS nested loops, so that an attacker watching power or EM
// traces cannot line up the same multiply-accumulate (the same secret weight)
// at the same point of every trace. Software loads each bank once per layer
// with SHFL_LD (one register per instruction: a bin's first iteration into the
// current count set, its last iteration into the max count set), and then
// fetches each loop index with SHFL_GNI instead of using the loop counter.
//
// Structure: an instruction decoder (shfl_decoder), NUM_BANKS shuffle_bank
// instances, the bank-select multiplexers that steer a SHFL_LD to one bank
// and return the chosen bank's next iteration register for a SHFL_GNI. All
// banks share the TRNG input; a bank samples it only in the first cycle of a
// choice.
//
// Timing: a SHFL_LD is taken in the cycle it is issued. A SHFL_GNI completes
// in the cycle it is issued when the bank has a value ready (rf_we=1 with
// rf_waddr=Rd and rf_wdata=the iteration, zero-extended to 32 bits). A bank
// needs three cycles to choose the next value after a read or after its last
// load; while the value is not ready `stall` is high and the core must hold
// the instruction. With the seven or more cycles that software spends
// between reads, no stall occurs in steady state.
//
// Sizes follow the published configuration: 16 registers per set, 4 banks,
// 10-bit registers, the published instruction fields. A SHFL_LD whose
// register select addresses no register of this build (regsel >= K) is
// ignored and flagged on `ld_ignored`; that, the separate is_gni input and
// the stall handshake are this design's choices.
module blackjack
  import blackjack_pkg::*;
#(
  parameter int unsigned K         = K_DEFAULT,
  parameter int unsigned NUM_BANKS = NUM_BANKS_DEF,
  parameter int unsigned VAL_W     = VAL_W_DEFAULT
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // instruction from the core's decode/execute stage
  input  logic                 instr_valid,
  input  logic                 instr_is_gni,
  input  logic [31:0]          instr,
  output logic                 stall,
  output logic                 ld_ignored,
  // register file write port of the core
  output logic                 rf_we,
  output logic [RD_W-1:0]      rf_waddr,
  output logic [31:0]          rf_wdata,
  // TRNG
  input  logic [$clog2(K)-1:0] trng_bits,
  // status
  output logic [NUM_BANKS-1:0] bank_armed
);
  localparam int unsigned IW = $clog2(K);

  shfl_instr_t      dec;
  logic             is_ld, is_gni, reg_ok;
  logic [NUM_BANKS-1:0] bank_hit;
  logic [NUM_BANKS-1:0] ld_b, gni_b;
  logic [VAL_W-1:0] nir_value [NUM_BANKS];
  logic [NUM_BANKS-1:0] nir_valid;
  logic [VAL_W-1:0] sel_value;
  logic             sel_valid;

  shfl_decoder u_dec (
    .instr_valid,
    .is_gni (instr_is_gni),
    .instr,
    .dec
  );

  assign is_ld  = dec.valid && dec.op == OP_LD;
  assign is_gni = dec.valid && dec.op == OP_GNI;
  assign reg_ok = (32'(dec.regsel) < K);

  // ---- bank select multiplexers -----------------------------------------
  always_comb begin
    for (int unsigned b = 0; b < NUM_BANKS; b++) begin
      bank_hit[b] = (32'(dec.bank) == b);
      ld_b[b]     = is_ld && reg_ok && bank_hit[b];
      gni_b[b]    = is_gni && bank_hit[b];
    end
    sel_value = '0;
    sel_valid = 1'b0;
    for (int unsigned b = 0; b < NUM_BANKS; b++) begin
      if (bank_hit[b]) begin
        sel_value = nir_value[b];
        sel_valid = nir_valid[b];
      end
    end
  end

  for (genvar b = 0; b < NUM_BANKS; b++) begin : g_bank
    shuffle_bank #(.K(K), .VAL_W(VAL_W)) u_bank (
      .clk, .rst_n,
      .ld          (ld_b[b]),
      .ld_set      (dec.set),
      .ld_reg      (dec.regsel[IW-1:0]),
      .ld_value    (VAL_W'(dec.value)),
      .trng        (trng_bits),
      .gni         (gni_b[b]),
      .nir_value   (nir_value[b]),
      .nir_valid   (nir_valid[b]),
      .armed       (bank_armed[b]),
      .ev_update (),
      .ev_redirect (),
      .ev_disallow (),
      .ev_rearm ()
    );
  end

  // The ev_* strobes of the banks are left open here; they exist for
  // observation in simulation.

  // ---- result to the register file --------------------------------------
  assign rf_we      = is_gni && sel_valid;
  assign rf_waddr   = dec.rd;
  assign rf_wdata   = 32'(sel_value);
  assign stall      = is_gni && !sel_valid;
  assign ld_ignored = is_ld && !reg_ok;

  initial assert (NUM_BANKS >= 1 && NUM_BANKS <= (1 << BANKSEL_W))
    else $error("blackjack: NUM_BANKS must fit the 2-bit bank field");
  initial assert (K <= (1 << REGSEL_W))
    else $error("blackjack: K must fit the 7-bit register select field");

endmodule
