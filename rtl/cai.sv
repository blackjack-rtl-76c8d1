// cai: compare-and-increment unit of a shuffler bank.
//
// When the bank hands out the value of the selected current count register,
// this unit compares that value with the bin's max count register. If the
// maximum has not been reached it produces the incremented value to be
// written back (cur_we). If it has, the bin is exhausted and the unit raises
// `disallow`, which clears the bin's allow bit in the arbiter. The behaviour
// follows the published description; the comparison is "equal to max" (the
// max register holds the bin's last iteration, inclusive).
//
// Purely combinational. `en` qualifies the update (the cycle in which the
// value is handed out); with en=0 both cur_we and disallow are 0.
module cai #(
  parameter int unsigned VAL_W = blackjack_pkg::VAL_W_DEFAULT
) (
  input  logic             en,
  input  logic [VAL_W-1:0] cur,
  input  logic [VAL_W-1:0] max,
  output logic             cur_we,
  output logic [VAL_W-1:0] cur_next,
  output logic             disallow
);
  logic at_max;

  always_comb begin
    at_max   = (cur == max);
    cur_next = cur + VAL_W'(1);
    cur_we   = en && !at_max;
    disallow = en && at_max;
  end

endmodule
