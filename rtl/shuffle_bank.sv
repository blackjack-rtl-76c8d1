// shuffle_bank: one bank of the counter-based shuffler; it hands out every
// iteration of one loop exactly once per pass, in a random order.
//
// How it works. The loop's iteration range [0, N) is cut into up to K
// contiguous bins. Bin r owns a current count register (its next iteration
// number) and a max count register (its last iteration number, inclusive),
// plus an allow bit that is 1 while the bin has iterations left. To choose the
// next iteration, K-bit-wide randomness is not needed: log2(K) TRNG bits name
// a bin directly (K is a power of two, so no modulus is ever computed). The
// round-robin arbiter (rra) replaces an exhausted bin by the closest allowed
// one, the bin's current value goes to the next iteration register, and the
// compare-and-increment unit (cai) either increments the bin or clears its
// allow bit. A choice takes three cycles (bank_ctrl) and starts as soon as the
// CPU reads the previous value.
//
// Loading (SHFL_LD through ld_*): writing a current count register clears the
// bin's allow bit; writing a max count register sets it. Writing current count
// register 0 first clears all allow bits of the bank, so a load that starts at
// bin 0 discards bins left over from an earlier, larger loop. Any load empties
// the next iteration register and restarts the sequencer.
//
// Re-arming: when the last allowed bin is used up, the bank starts a new pass
// by itself: every bin loaded since the last reload is allowed again and its
// current count is restored to its start, 0 for bin 0 and max[r-1]+1 for bin
// r (bins are contiguous and ascending). This lets an inner loop run once per
// outer iteration with a single load per layer.
//
// Follows the published design: bins, current/max count register sets, RRA
// with allow bits, CAI with "disallow register", load multiplexers, next
// iteration register, three-cycle choice, one-cycle read. This design's own
// choices: the load ordering rules above, the automatic re-arm (the
// published software loads each bank once per layer but calls the inner
// loop's bank once per outer iteration, which needs it), the re-arm start
// values, and the event outputs (ev_*), which only report what happened.
//
// Interface: ld/ld_set/ld_reg/ld_value write one register; trng supplies
// log2(K) random bits per cycle (sampled in the first cycle of a choice);
// gni reads the next iteration register (nir_value/nir_valid are valid in the
// same cycle; with nir_valid low the reader must wait). `armed` is 0 until the
// bank holds a loaded range.
module shuffle_bank
  import blackjack_pkg::*;
#(
  parameter int unsigned K     = K_DEFAULT,
  parameter int unsigned VAL_W = VAL_W_DEFAULT
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // SHFL_LD to this bank
  input  logic                 ld,
  input  set_e                 ld_set,
  input  logic [$clog2(K)-1:0] ld_reg,
  input  logic [VAL_W-1:0]     ld_value,
  // randomness
  input  logic [$clog2(K)-1:0] trng,
  // SHFL_GNI from this bank
  input  logic                 gni,
  output logic [VAL_W-1:0]     nir_value,
  output logic                 nir_valid,
  output logic                 armed,
  // events, one-cycle strobes
  output logic                 ev_update,    // a value entered the next iteration register
  output logic                 ev_redirect,  // arbiter replaced an exhausted bin
  output logic                 ev_disallow,  // a bin was used up
  output logic                 ev_rearm      // a pass ended, bins re-armed
);
  localparam int unsigned IW = $clog2(K);

  logic [VAL_W-1:0] cur_q [K];
  logic [VAL_W-1:0] max_q [K];
  logic [VAL_W-1:0] restore_val [K];
  logic [VAL_W-1:0] max_restore_unused [K];
  logic [K-1:0]     allow_q, armed_q;
  logic [IW-1:0]    trng_q, sel_q;
  logic [IW-1:0]    grant;
  logic             grant_valid;
  logic             sample, arb, update;
  logic             consume;
  logic [VAL_W-1:0] sel_cur, sel_max;
  logic             cai_we, cai_disallow;
  logic [VAL_W-1:0] cai_next;
  logic             last_bin;
  logic             rearm;
  logic             cur_we;
  logic [IW-1:0]    cur_waddr;
  logic [VAL_W-1:0] cur_wdata;

  assign consume = gni && nir_valid;

  // ---- sequencer -------------------------------------------------------
  bank_ctrl u_ctrl (
    .clk, .rst_n,
    .restart    (ld),
    .has_work (|allow_q),
    .nir_valid,
    .consume,
    .sample, .arb, .update, .busy ()
  );

  // ---- arbiter ---------------------------------------------------------
  rra #(.K(K)) u_rra (
    .allow       (allow_q),
    .pick        (trng_q),
    .grant       (grant),
    .grant_valid (grant_valid)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      trng_q <= '0;
      sel_q  <= '0;
    end else begin
      if (sample) trng_q <= trng;
      if (arb)    sel_q  <= grant;
    end
  end

  // ---- read multiplexers and compare-and-increment -----------------------
  assign sel_cur = cur_q[sel_q];
  assign sel_max = max_q[sel_q];

  cai #(.VAL_W(VAL_W)) u_cai (
    .en       (update),
    .cur      (sel_cur),
    .max      (sel_max),
    .cur_we   (cai_we),
    .cur_next (cai_next),
    .disallow (cai_disallow)
  );

  // The last allowed bin is used up: start the next pass.
  assign last_bin = cai_disallow && ((allow_q & ~(K'(1) << sel_q)) == '0);
  assign rearm    = last_bin;

  // ---- current count set: load value or CAI result (load has priority) ---
  always_comb begin
    cur_we    = 1'b0;
    cur_waddr = sel_q;
    cur_wdata = cai_next;
    if (ld && ld_set == SET_CURRENT) begin
      cur_we    = 1'b1;
      cur_waddr = ld_reg;
      cur_wdata = ld_value;
    end else if (cai_we) begin
      cur_we    = 1'b1;
    end
  end

  // Start of each bin, used when a pass is re-armed.
  always_comb begin
    restore_val[0] = '0;
    for (int unsigned r = 1; r < K; r++) restore_val[r] = max_q[r-1] + VAL_W'(1);
    for (int unsigned r = 0; r < K; r++) max_restore_unused[r] = '0;
  end

  count_reg_set #(.K(K), .VAL_W(VAL_W)) u_cur (
    .clk, .rst_n,
    .we       (cur_we),
    .waddr    (cur_waddr),
    .wdata    (cur_wdata),
    .restore_we   (rearm ? armed_q : '0),
    .restore_data (restore_val),
    .q        (cur_q)
  );

  count_reg_set #(.K(K), .VAL_W(VAL_W)) u_max (
    .clk, .rst_n,
    .we       (ld && ld_set == SET_MAX),
    .waddr    (ld_reg),
    .wdata    (ld_value),
    .restore_we   ('0),
    .restore_data (max_restore_unused),
    .q        (max_q)
  );

  // ---- allow bits (the arbiter's per-register state) -------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      allow_q <= '0;
      armed_q <= '0;
    end else if (ld) begin
      if (ld_set == SET_CURRENT) begin
        if (ld_reg == '0) begin
          allow_q <= '0;
          armed_q <= '0;
        end else begin
          allow_q[ld_reg] <= 1'b0;
          armed_q[ld_reg] <= 1'b0;
        end
      end else begin
        allow_q[ld_reg] <= 1'b1;
        armed_q[ld_reg] <= 1'b1;
      end
    end else if (rearm) begin
      allow_q <= armed_q;
    end else if (cai_disallow) begin
      allow_q[sel_q] <= 1'b0;
    end
  end

  // ---- next iteration register -----------------------------------------
  next_iter_reg #(.VAL_W(VAL_W)) u_nir (
    .clk, .rst_n,
    .clear   (ld),
    .load    (update),
    .din     (sel_cur),
    .consume (consume),
    .value   (nir_value),
    .valid   (nir_valid)
  );

  assign armed       = |armed_q;
  assign ev_update   = update;
  assign ev_redirect = arb && (grant != trng_q);
  assign ev_disallow = cai_disallow;
  assign ev_rearm    = rearm;

  // The arbiter always finds a bin when a choice is under way.
  a_grant: assert property (@(posedge clk) disable iff (!rst_n)
                            arb |-> grant_valid);
  // The bin handed out is still allowed.
  a_allowed: assert property (@(posedge clk) disable iff (!rst_n)
                              update |-> allow_q[sel_q]);

endmodule
