// bank_ctrl_tb: self-checking test of the three-cycle bank sequencer.
//
// Drives random has_work / read / restart patterns, keeps a model of the
// next iteration register (filled by `update`, emptied by a read or restart),
// and checks the published timing: a choice starts when there is work and
// the register is empty or being read, and its three steps (sample, arb,
// update) come in three consecutive cycles unless a restart cancels them.
// Also checks that a choice never starts while the register holds an unread
// value, and that a choice is started within one cycle of being possible.
module bank_ctrl_tb;
  logic clk = 1'b0, rst_n = 1'b0;
  logic restart, has_work, nir_valid, consume;
  logic sample, arb, update, busy;
  int unsigned checks = 0, failures = 0;
  int unsigned n_update = 0, n_restart_cut = 0;
  int          phase;        // -1 idle, else cycles since sample
  logic        exp_sample;

  bank_ctrl dut (.clk, .rst_n, .restart, .has_work, .nir_valid, .consume,
                 .sample, .arb, .update, .busy);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(input logic got, input logic exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("bank_ctrl_tb @%0t: %s = %0b, expected %0b", $time, what, got, exp);
    end
  endtask

  initial begin
    restart = 0; has_work = 0; nir_valid = 0; consume = 0;
    phase = -1;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 20000; n++) begin
      @(negedge clk);
      restart  = ($urandom % 23) == 0;
      has_work = ($urandom % 8) != 0;
      consume  = nir_valid && (($urandom % 3) == 0);
      #1;
      // reference outputs for this cycle
      exp_sample = !restart && phase == -1 && has_work && (!nir_valid || consume);
      expect_eq(sample, exp_sample,                "sample");
      expect_eq(arb,    !restart && phase == 0,    "arb");
      expect_eq(update, !restart && phase == 1,    "update");
      expect_eq(busy,   phase != -1,               "busy");
      // advance the reference at the clock edge
      if (restart && phase != -1) n_restart_cut++;
      if (restart)              phase = -1;
      else if (exp_sample)      phase = 0;
      else if (phase == 0)      phase = 1;
      else if (phase == 1)      phase = -1;
      if (update && !restart) n_update++;
      @(posedge clk);
      if (restart)             nir_valid = 1'b0;
      else if (update)         nir_valid = 1'b1;
      else if (consume)        nir_valid = 1'b0;
    end
    checks++;
    if (n_update == 0 || n_restart_cut == 0) failures++;
    $display("bank_ctrl_tb: %0d choices, %0d cut by restart", n_update, n_restart_cut);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
