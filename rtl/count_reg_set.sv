// count_reg_set: one set of K count registers of a shuffler bank.
//
// A bank holds two such sets: the current count registers, which track the
// next iteration number of each bin, and the max count registers, which hold
// the last iteration number of each bin. This module is the register array
// only; the multiplexers around it (which value is written, which register is
// read) belong to the bank, as in the published block diagram.
//
// Interface: one addressed write port (we, waddr, wdata) and a restore port
// (restore_we mask, restore_data) that writes several registers in the same cycle;
// the addressed write wins where both hit one register. All K values are
// visible on q. Writes take effect at the next rising clock edge; reset
// clears every register to 0. The restore port is this design's addition: it
// lets a bank re-arm all bins at once when a loop pass is complete.
module count_reg_set #(
  parameter int unsigned K     = blackjack_pkg::K_DEFAULT,
  parameter int unsigned VAL_W = blackjack_pkg::VAL_W_DEFAULT
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 we,
  input  logic [$clog2(K)-1:0] waddr,
  input  logic [VAL_W-1:0]     wdata,
  input  logic [K-1:0]         restore_we,
  input  logic [VAL_W-1:0]     restore_data [K],
  output logic [VAL_W-1:0]     q [K]
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned i = 0; i < K; i++) q[i] <= '0;
    end else begin
      for (int unsigned i = 0; i < K; i++) begin
        if (we && waddr == $clog2(K)'(i)) q[i] <= wdata;
        else if (restore_we[i])               q[i] <= restore_data[i];
      end
    end
  end

endmodule
