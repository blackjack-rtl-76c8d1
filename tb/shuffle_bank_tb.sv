// shuffle_bank_tb: self-checking test of one shuffler bank.
//
// Plays the role of the software library: load_bank() cuts [0, N) into
// `nbins` contiguous nbins of ceil(N/nbins) iterations (the last one shorter)
// and writes each bin's first iteration to the current count set and its last
// iteration to the max count set. Then it reads passes of N iterations and
// checks, independently of the design:
//   - every pass is a permutation of [0, N) (no repeat, none missing);
//   - within a pass each bin's iterations come in ascending order (the
//     counter-based scheme only chooses which bin goes next);
//   - with one bin the order is 0, 1, ..., N-1;
//   - a value is ready exactly 3 cycles after the previous one was read, so
//     reads 7 cycles apart never wait;
//   - passes repeat without reloading (re-arm) and differ from each other;
//   - reloading a smaller loop mid-pass discards the old nbins.
module shuffle_bank_tb;
  import blackjack_pkg::*;
  localparam int unsigned K     = 16;
  localparam int unsigned VAL_W = 10;
  localparam int unsigned IW    = $clog2(K);

  logic             clk = 1'b0, rst_n = 1'b0;
  logic             ld = 1'b0, gni = 1'b0;
  set_e             ld_set = SET_CURRENT;
  logic [IW-1:0]    ld_reg = '0;
  logic [VAL_W-1:0] ld_value = '0;
  logic [IW-1:0]    trng = '0;
  logic [VAL_W-1:0] nir_value;
  logic             nir_valid, armed;
  logic             ev_update, ev_redirect, ev_disallow, ev_rearm;

  int unsigned checks = 0, failures = 0;
  int unsigned n_redirect = 0, n_rearm = 0, n_wait = 0;
  int          bin_of [1024];
  int          last_in_bin [K];

  shuffle_bank #(.K(K), .VAL_W(VAL_W)) dut (
    .clk, .rst_n, .ld, .ld_set, .ld_reg, .ld_value, .trng, .gni,
    .nir_value, .nir_valid, .armed, .ev_update, .ev_redirect, .ev_disallow, .ev_rearm);

  always #5 clk = ~clk;
  always @(negedge clk) trng <= IW'($urandom);
  always @(posedge clk) begin
    if (ev_redirect) n_redirect++;
    if (ev_rearm)    n_rearm++;
  end

  initial begin : watchdog
    repeat (2000000) @(posedge clk);
    failures++;
    $display("shuffle_bank_tb: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_true(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("shuffle_bank_tb @%0t: %s", $time, what);
    end
  endtask

  task automatic write_reg(input set_e s, input int r, input int v);
    @(negedge clk);
    ld = 1'b1; ld_set = s; ld_reg = IW'(r); ld_value = VAL_W'(v);
    @(negedge clk);
    ld = 1'b0;
  endtask

  // Software side of load_bank: contiguous nbins of a = ceil(n/nbins).
  task automatic load_bank(input int n, input int nbins);
    int a;
    a = (n + nbins - 1) / nbins;
    for (int r = 0; r < nbins; r++) begin
      int first, last;
      first = r * a;
      last  = (r + 1) * a - 1;
      if (last > n - 1) last = n - 1;
      if (first <= last) begin
        write_reg(SET_CURRENT, r, first);
        write_reg(SET_MAX, r, last);
        for (int i = first; i <= last; i++) bin_of[i] = r;
      end
    end
  endtask

  // Read one iteration; gap = idle cycles before the read.
  task automatic read_one(input int gap, output int value, output int waited);
    repeat (gap) @(negedge clk);
    @(negedge clk);
    gni = 1'b1;
    waited = 0;
    while (!nir_valid) begin
      @(negedge clk);
      waited++;
    end
    value = int'(nir_value);
    @(negedge clk);
    gni = 1'b0;
  endtask

  // Read a whole pass and check it; returns a signature of the order.
  task automatic run_pass(input int n, input int nbins, input int gap,
                          output longint unsigned sig);
    bit seen [1024];
    int v, w;
    bit in_order;
    for (int i = 0; i < n; i++) seen[i] = 0;
    for (int r = 0; r < K; r++) last_in_bin[r] = -1;
    sig = 64'd1469598103934665603;
    in_order = 1;
    for (int i = 0; i < n; i++) begin
      read_one(gap, v, w);
      if (w != 0) n_wait++;
      if (gap >= 2) expect_true(w == 0, $sformatf("read waited %0d cycles with gap %0d", w, gap));
      expect_true(v < n && !seen[v], $sformatf("value %0d repeated or out of range (n=%0d)", v, n));
      if (v < n) begin
        seen[v] = 1;
        expect_true(v > last_in_bin[bin_of[v]],
                    $sformatf("bin %0d out of order: %0d after %0d", bin_of[v], v, last_in_bin[bin_of[v]]));
        last_in_bin[bin_of[v]] = v;
      end
      if (v != i) in_order = 0;
      sig = (sig ^ longint'(v)) * 64'd1099511628211;
    end
    if (nbins == 1) expect_true(in_order, "single bin did not give the original order");
  endtask

  // Latency: value ready exactly three cycles after a read.
  task automatic check_latency();
    int cyc;
    @(negedge clk);
    while (!nir_valid) @(negedge clk);
    gni = 1'b1;
    @(negedge clk);
    gni = 1'b0;
    cyc = 1;
    while (!nir_valid && cyc < 20) begin
      @(negedge clk);
      cyc++;
    end
    expect_true(cyc == 3, $sformatf("next value after %0d cycles, expected 3", cyc));
  endtask

  initial begin
    longint unsigned s0, s1;
    int distinct, v, w;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    expect_true(!armed && !nir_valid, "bank not empty after reset");

    // The published example: ten iterations, two nbins.
    load_bank(10, 2);
    distinct = 0;
    run_pass(10, 2, 7, s0);
    for (int p = 0; p < 30; p++) begin
      run_pass(10, 2, 7, s1);
      if (s1 != s0) distinct++;
    end
    expect_true(distinct > 0, "all passes of the 10/2 loop had the same order");

    // One bin: no shuffling.
    load_bank(37, 1);
    run_pass(37, 1, 7, s0);
    run_pass(37, 1, 3, s0);

    // Full 16 nbins, sizes from the evaluated networks.
    load_bank(144, 16);  run_pass(144, 16, 7, s0); run_pass(144, 16, 7, s1);
    expect_true(s0 != s1, "two passes of 144 identical");
    load_bank(768, 16);  run_pass(768, 16, 7, s0);
    load_bank(1024, 16); run_pass(1024, 16, 7, s0);
    load_bank(17, 16);   run_pass(17, 16, 7, s0);   // uneven last bin
    load_bank(6, 16);    run_pass(6, 16, 7, s0);    // fewer iterations than nbins

    // Back-to-back reads: must wait, still correct.
    load_bank(50, 16);   run_pass(50, 16, 0, s0);
    expect_true(n_wait > 0, "back-to-back reads never waited");

    // Latency.
    for (int i = 0; i < 20; i++) check_latency();

    // Reload a smaller loop in the middle of a pass.
    load_bank(200, 16);
    for (int i = 0; i < 57; i++) read_one(1, v, w);
    load_bank(20, 4);
    run_pass(20, 4, 7, s0);
    run_pass(20, 4, 7, s0);

    expect_true(n_redirect > 0, "arbiter never redirected");
    expect_true(n_rearm > 0, "bank never re-armed");
    $display("shuffle_bank_tb: redirects=%0d rearms=%0d waits=%0d", n_redirect, n_rearm, n_wait);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
