// count_reg_set_tb: self-checking test of a count register set.
//
// Random addressed writes, random multi-register restores and collisions of
// the two (the addressed write must win), compared every cycle with a
// reference array. Checks the reset value of every register.
module count_reg_set_tb;
  localparam int unsigned K     = 16;
  localparam int unsigned VAL_W = 10;
  localparam int unsigned IW    = $clog2(K);

  logic                 clk = 1'b0, rst_n = 1'b0;
  logic                 we;
  logic [IW-1:0]        waddr;
  logic [VAL_W-1:0]     wdata;
  logic [K-1:0]         restore_we;
  logic [VAL_W-1:0]     restore_data [K];
  logic [VAL_W-1:0]     q [K];
  logic [VAL_W-1:0]     model [K];
  int unsigned          checks = 0, failures = 0;

  count_reg_set #(.K(K), .VAL_W(VAL_W)) dut (.clk, .rst_n, .we, .waddr, .wdata,
                                             .restore_we, .restore_data, .q);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare();
    for (int i = 0; i < K; i++) begin
      checks++;
      if (q[i] !== model[i]) begin
        failures++;
        if (failures < 10) $display("count_reg_set_tb: reg %0d = %0d, expected %0d", i, q[i], model[i]);
      end
    end
  endtask

  initial begin
    we = 0; waddr = '0; wdata = '0; restore_we = '0;
    for (int i = 0; i < K; i++) begin restore_data[i] = '0; model[i] = '0; end
    repeat (2) @(posedge clk);
    #1 compare();
    rst_n = 1'b1;
    for (int n = 0; n < 5000; n++) begin
      @(negedge clk);
      we     = ($urandom % 3) != 0;
      waddr  = IW'($urandom);
      wdata  = VAL_W'($urandom);
      restore_we = (($urandom % 4) == 0) ? K'($urandom) : '0;
      for (int i = 0; i < K; i++) restore_data[i] = VAL_W'($urandom);
      for (int i = 0; i < K; i++) begin
        if (we && waddr == IW'(i)) model[i] = wdata;
        else if (restore_we[i])        model[i] = restore_data[i];
      end
      @(posedge clk);
      #1 compare();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
