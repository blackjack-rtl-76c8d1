// next_iter_reg: the "next iteration" register of a shuffler bank.
//
// Holds the iteration number the bank has chosen until the CPU reads it with
// SHFL_GNI. The value is visible combinationally on `value` together with
// `valid`, so the read completes in the cycle the instruction executes. A
// read (`consume` while valid) empties the register at the next clock edge;
// `load` fills it (and wins over a consume in the same cycle, which is how a
// new value replaces one being read); `clear` empties it (a bank reload).
// Reset empties it. Function as published; the valid flag and its
// priorities are this design's choice.
module next_iter_reg #(
  parameter int unsigned VAL_W = blackjack_pkg::VAL_W_DEFAULT
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             load,
  input  logic [VAL_W-1:0] din,
  input  logic             consume,
  output logic [VAL_W-1:0] value,
  output logic             valid
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      value <= '0;
      valid <= 1'b0;
    end else if (clear) begin
      valid <= 1'b0;
    end else if (load) begin
      value <= din;
      valid <= 1'b1;
    end else if (consume) begin
      valid <= 1'b0;
    end
  end

endmodule
