// next_iter_reg_tb: self-checking test of the next iteration register.
//
// Random clear/load/consume combinations against a reference with the same
// priorities (clear, then load, then consume), plus a directed sequence:
// load, value visible with valid in the next cycle, consume empties it.
module next_iter_reg_tb;
  localparam int unsigned VAL_W = 10;

  logic             clk = 1'b0, rst_n = 1'b0;
  logic             clear, load, consume, valid;
  logic [VAL_W-1:0] din, value;
  logic [VAL_W-1:0] m_value;
  logic             m_valid;
  int unsigned      checks = 0, failures = 0;

  next_iter_reg #(.VAL_W(VAL_W)) dut (.clk, .rst_n, .clear, .load, .din, .consume,
                                      .value, .valid);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare();
    checks++;
    if (valid !== m_valid || (m_valid && value !== m_value)) begin
      failures++;
      if (failures < 10) $display("next_iter_reg_tb: got %0b/%0d exp %0b/%0d", valid, value, m_valid, m_value);
    end
  endtask

  task automatic step(input logic c, input logic l, input logic [VAL_W-1:0] d, input logic s);
    @(negedge clk);
    clear = c; load = l; din = d; consume = s;
    if (c)      m_valid = 1'b0;
    else if (l) begin m_value = d; m_valid = 1'b1; end
    else if (s) m_valid = 1'b0;
    @(posedge clk);
    #1 compare();
  endtask

  initial begin
    clear = 0; load = 0; consume = 0; din = '0;
    m_valid = 0; m_value = '0;
    repeat (2) @(posedge clk);
    #1 compare();
    rst_n = 1'b1;
    step(0, 1, 10'd123, 0);   // load
    step(0, 0, 10'd0,   0);   // hold
    step(0, 0, 10'd0,   1);   // read empties it
    step(0, 1, 10'd7,   0);
    step(1, 0, 10'd0,   0);   // clear
    for (int n = 0; n < 4000; n++)
      step(($urandom % 8) == 0, ($urandom % 2) == 0, VAL_W'($urandom), ($urandom % 2) == 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
