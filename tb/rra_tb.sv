// rra_tb: self-checking test of the round-robin arbiter.
//
// Applies every pick value with many allow patterns (all-ones, all-zeros,
// one-hot, random, sparse random) and compares grant/grant_valid with a
// reference that walks pick, pick+1, ... modulo K and takes the first allowed
// register. Also checks that an allowed pick is always granted unchanged.
module rra_tb;
  localparam int unsigned K  = 16;
  localparam int unsigned IW = $clog2(K);

  logic [K-1:0]  allow;
  logic [IW-1:0] pick, grant;
  logic          grant_valid;
  int unsigned   checks = 0, failures = 0;
  logic          clk = 1'b0;

  rra #(.K(K)) dut (.allow, .pick, .grant, .grant_valid);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("rra_tb: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_one(input logic [K-1:0] a, input logic [IW-1:0] p);
    logic [IW-1:0] exp_g;
    logic          exp_v;
    exp_v = 1'b0;
    exp_g = '0;
    for (int i = 0; i < K; i++) begin
      if (!exp_v && a[(int'(p) + i) % K]) begin
        exp_v = 1'b1;
        exp_g = IW'((int'(p) + i) % K);
      end
    end
    allow = a;
    pick  = p;
    #1;
    checks++;
    if (grant_valid !== exp_v || (exp_v && grant !== exp_g)) begin
      failures++;
      if (failures < 10)
        $display("rra_tb: allow=%b pick=%0d got %0d/%0b exp %0d/%0b",
                 a, p, grant, grant_valid, exp_g, exp_v);
    end
  endtask

  initial begin
    for (int p = 0; p < K; p++) begin
      check_one('1, IW'(p));
      check_one('0, IW'(p));
      for (int b = 0; b < K; b++) check_one(K'(1) << b, IW'(p));
    end
    for (int n = 0; n < 20000; n++) begin
      logic [K-1:0] a;
      a = K'($urandom);
      if (n % 2 == 1) a = a & K'($urandom) & K'($urandom);  // sparse
      check_one(a, IW'($urandom));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
