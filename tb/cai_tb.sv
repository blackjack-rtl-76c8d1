// cai_tb: self-checking test of the compare-and-increment unit.
//
// Drives random and boundary (cur == max, cur = max - 1, 0, all-ones) pairs
// with en high and low, and checks cur_we, cur_next and disallow against the
// rule: below max -> increment, at max -> disallow, nothing when en is low.
module cai_tb;
  localparam int unsigned VAL_W = 10;

  logic             en, cur_we, disallow;
  logic [VAL_W-1:0] cur, max, cur_next;
  int unsigned      checks = 0, failures = 0;
  logic             clk = 1'b0;

  cai #(.VAL_W(VAL_W)) dut (.en, .cur, .max, .cur_we, .cur_next, .disallow);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apply(input logic e, input logic [VAL_W-1:0] c, input logic [VAL_W-1:0] m);
    en = e; cur = c; max = m;
    #1;
    checks++;
    if (cur_we !== (e && c != m) || disallow !== (e && c == m) ||
        (e && c != m && cur_next !== VAL_W'(c + 1))) begin
      failures++;
      if (failures < 10)
        $display("cai_tb: en=%0b cur=%0d max=%0d -> we=%0b next=%0d dis=%0b",
                 e, c, m, cur_we, cur_next, disallow);
    end
  endtask

  initial begin
    for (int n = 0; n < 5000; n++) begin
      logic [VAL_W-1:0] m;
      m = VAL_W'($urandom);
      apply(1'b1, m, m);
      apply(1'b1, m - 1, m);
      apply(1'b1, VAL_W'($urandom), m);
      apply(1'b0, m, m);
      apply(1'b0, VAL_W'($urandom), m);
    end
    apply(1'b1, '0, '0);
    apply(1'b1, '1, '1);
    apply(1'b1, '0, '1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
