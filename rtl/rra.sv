// rra: combinational round-robin arbiter that turns a random register index
// into a register that still has iterations left.
//
// Each bin (current count register) of a bank has one allow bit; a 1 means
// the bin still has iterations to hand out. The TRNG supplies a random index
// `pick`. If allow[pick] is set, that bin is granted. Otherwise the arbiter
// grants the closest allowed bin, searching upward from `pick` and wrapping
// around (pick+1, pick+2, ... modulo K). The result is available in the same
// cycle, so no TRNG value is ever thrown away and the selection always costs
// the same time. The single-cycle, purely combinational arbiter and the allow
// bits follow the published design; the search direction ("closest" taken as
// next-higher with wrap-around) is this design's choice.
//
// Interface: allow[K-1:0], pick[$clog2(K)-1:0] in; grant, grant_valid out.
// grant_valid is 0 only when no bin is allowed. K must be a power of two so
// that the index wraps by truncation.
module rra #(
  parameter int unsigned K = blackjack_pkg::K_DEFAULT
) (
  input  logic [K-1:0]         allow,
  input  logic [$clog2(K)-1:0] pick,
  output logic [$clog2(K)-1:0] grant,
  output logic                 grant_valid
);
  localparam int unsigned IW = $clog2(K);

  logic [IW-1:0] idx [K];

  // Candidate i is pick+i, wrapped by the index width.
  always_comb begin
    for (int unsigned i = 0; i < K; i++) begin
      idx[i] = pick + IW'(i);
    end
  end

  // First allowed candidate in search order wins.
  always_comb begin
    grant       = pick;
    grant_valid = 1'b0;
    for (int i = K - 1; i >= 0; i--) begin
      if (allow[idx[i]]) begin
        grant       = idx[i];
        grant_valid = 1'b1;
      end
    end
  end

  // K must be a power of two (the TRNG output is used directly, no modulus).
  initial assert ((1 << IW) == K) else $error("rra: K must be a power of two");

endmodule
