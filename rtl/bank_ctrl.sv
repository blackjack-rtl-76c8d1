// bank_ctrl: sequencer that chooses a bank's next iteration in three cycles.
//
// A selection starts whenever the bank has work (some bin is allowed) and its
// next iteration register is empty or is being read in this cycle, so a new
// choice begins as soon as the CPU takes the previous one. It then always
// takes exactly three cycles, whatever the data:
//   cycle 1 (S_IDLE, start): sample the TRNG bits      -> sample
//   cycle 2 (S_ARB):         arbiter picks the bin     -> arb
//   cycle 3 (S_UPD):         bin value to next iteration register,
//                            compare-and-increment or disallow -> update
// A SHFL_LD to the bank (`restart`) returns the sequencer to S_IDLE and
// suppresses every strobe, so a half-finished choice never uses registers
// being rewritten. The three-cycle generation, its start on a read, and the
// data-independent timing follow the published design; the split of the
// three cycles into these steps is this design's choice.
module bank_ctrl (
  input  logic clk,
  input  logic rst_n,
  input  logic restart,      // SHFL_LD to this bank in this cycle
  input  logic has_work,   // some bin is allowed
  input  logic nir_valid,  // next iteration register full
  input  logic consume,    // SHFL_GNI reads the register in this cycle
  output logic sample,     // capture TRNG bits
  output logic arb,        // capture arbiter grant
  output logic update,     // write next iteration register, CAI update
  output logic busy
);
  typedef enum logic [1:0] {
    S_IDLE = 2'd0,
    S_ARB  = 2'd1,
    S_UPD  = 2'd2
  } state_e;

  state_e state, state_d;

  always_comb begin
    sample  = 1'b0;
    arb     = 1'b0;
    update  = 1'b0;
    state_d = state;
    if (restart) begin
      state_d = S_IDLE;
    end else begin
      unique case (state)
        S_IDLE: if (has_work && (!nir_valid || consume)) begin
                  sample  = 1'b1;
                  state_d = S_ARB;
                end
        S_ARB:  begin
                  arb     = 1'b1;
                  state_d = S_UPD;
                end
        S_UPD:  begin
                  update  = 1'b1;
                  state_d = S_IDLE;
                end
        default: state_d = S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) state <= S_IDLE;
    else        state <= state_d;
  end

  // The next iteration register is never refilled while it still holds an
  // unread value.
  a_no_overwrite: assert property (@(posedge clk) disable iff (!rst_n)
                                   update |-> !nir_valid);

endmodule
