// blackjack_tb: end-to-end test of the shuffling unit at its default size
// (16 registers per set, 4 banks, 10-bit registers).
//
// A behavioural core (bj_cpu_model) runs neural-network layers the way the
// shuffled software would: it loads one bank per loop with SHFL_LD and takes
// every loop index from SHFL_GNI. The testbench computes each layer with the
// shuffled order and compares every output with the same layer computed in
// plain loop order, and checks that every (outer, inner) index pair was
// visited exactly once. Layers run:
//   - the published 10-iteration, 2-bin example (bins loaded by hand);
//   - fully connected 768 -> 128 and 128 -> 10 (the mnist-mlp network),
//     two banks, inner bank re-armed once per output neuron;
//   - a 3x3, 1 -> 6 channel convolution over a 28x28 input, four banks
//     (output channel, row, column, input channel);
//   - 2x2 max pooling of its output, three banks (channel, row, column).
// It also drives the corner cases: a SHFL_GNI right after a load (stall), a
// register select beyond the 16 registers (ignored), a word with a wrong
// condition code (ignored), and checks that a read completes in its own
// cycle. Every mechanism is counted and must occur at least once.
module blackjack_tb;
  import blackjack_pkg::*;
  localparam int unsigned K = K_DEFAULT;

  logic        clk = 1'b0, rst_n = 1'b0;
  logic        instr_valid, instr_is_gni, stall, ld_ignored, rf_we;
  logic [31:0] instr, rf_wdata;
  logic [3:0]  rf_waddr;
  logic [$clog2(K)-1:0] trng_bits = '0;
  logic [NUM_BANKS_DEF-1:0] bank_armed;

  int unsigned checks = 0, failures = 0;
  int unsigned n_redirect = 0, n_disallow = 0, n_rearm = 0, n_ignored = 0;
  int unsigned n_bank_used [NUM_BANKS_DEF];

  blackjack dut (
    .clk, .rst_n, .instr_valid, .instr_is_gni, .instr, .stall, .ld_ignored,
    .rf_we, .rf_waddr, .rf_wdata, .trng_bits, .bank_armed);

  bj_cpu_model #(.K(K)) cpu (
    .clk, .instr_valid, .instr_is_gni, .instr, .stall, .rf_we, .rf_waddr, .rf_wdata);

  always #5 clk = ~clk;
  // TRNG stand-in: fresh random bits every cycle.
  always @(negedge clk) trng_bits <= $clog2(K)'($urandom);

  // Mechanism counters, observed inside the banks.
  always @(posedge clk) begin
    for (int b = 0; b < 4; b++) begin
      logic r, d, a, u;
      case (b)
        0: begin r = dut.g_bank[0].u_bank.ev_redirect; d = dut.g_bank[0].u_bank.ev_disallow;
                 a = dut.g_bank[0].u_bank.ev_rearm;    u = dut.g_bank[0].u_bank.ev_update; end
        1: begin r = dut.g_bank[1].u_bank.ev_redirect; d = dut.g_bank[1].u_bank.ev_disallow;
                 a = dut.g_bank[1].u_bank.ev_rearm;    u = dut.g_bank[1].u_bank.ev_update; end
        2: begin r = dut.g_bank[2].u_bank.ev_redirect; d = dut.g_bank[2].u_bank.ev_disallow;
                 a = dut.g_bank[2].u_bank.ev_rearm;    u = dut.g_bank[2].u_bank.ev_update; end
        default: begin r = dut.g_bank[3].u_bank.ev_redirect; d = dut.g_bank[3].u_bank.ev_disallow;
                 a = dut.g_bank[3].u_bank.ev_rearm;    u = dut.g_bank[3].u_bank.ev_update; end
      endcase
      if (r) n_redirect++;
      if (d) n_disallow++;
      if (a) n_rearm++;
      if (u) n_bank_used[b]++;
    end
    if (ld_ignored) n_ignored++;
  end

  initial begin : watchdog
    repeat (20_000_000) @(posedge clk);
    failures++;
    $display("blackjack_tb: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_true(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("blackjack_tb @%0t: %s", $time, what);
    end
  endtask

  // Deterministic small test data.
  function automatic int wgt(input int a, input int b, input int c);
    return ((a * 131 + b * 71 + c * 29) % 255) - 127;
  endfunction

  // ---- fully connected layer: n_in -> n_out, banks bo (outer), bi (inner)
  task automatic fc_layer(input int n_in, input int n_out, input int bo, input int bi);
    int unsigned visits [];
    longint sum [], ref_sum [];
    int r_i, r_j, bad_visit, same_order;
    int first_order [16];
    visits = new[n_in * n_out];
    sum = new[n_out];
    ref_sum = new[n_out];
    foreach (visits[x]) visits[x] = 0;
    for (int o = 0; o < n_out; o++) begin
      sum[o] = 0;
      ref_sum[o] = wgt(o, 7, 1);
      for (int i = 0; i < n_in; i++) ref_sum[o] += longint'(wgt(i, 3, 0)) * wgt(o, i, 2);
    end
    cpu.load_bank(bo, n_out);
    cpu.load_bank(bi, n_in);
    same_order = 0;
    for (int o = 0; o < n_out; o++) begin
      cpu.get_next_iteration(bo, r_i);
      for (int i = 0; i < n_in; i++) begin
        cpu.get_next_iteration(bi, r_j);
        if (r_i < n_out && r_j < n_in) begin
          visits[r_i * n_in + r_j]++;
          sum[r_i] += longint'(wgt(r_j, 3, 0)) * wgt(r_i, r_j, 2);
        end
        if (i < 16) begin
          if (o == 0) first_order[i] = r_j;
          else if (first_order[i] == r_j) same_order++;
        end
      end
      if (r_i < n_out) sum[r_i] += wgt(r_i, 7, 1);
    end
    bad_visit = 0;
    foreach (visits[x]) if (visits[x] != 1) bad_visit++;
    expect_true(bad_visit == 0, $sformatf("fc %0dx%0d: %0d weights not used exactly once", n_in, n_out, bad_visit));
    for (int o = 0; o < n_out; o++)
      expect_true(sum[o] == ref_sum[o], $sformatf("fc %0dx%0d: output %0d = %0d, expected %0d", n_in, n_out, o, sum[o], ref_sum[o]));
    // The inner order must change from neuron to neuron.
    if (n_out > 2)
      expect_true(same_order < 16 * (n_out - 1), $sformatf("fc %0dx%0d: inner order never changed", n_in, n_out));
  endtask

  // ---- convolution, valid padding, four shuffled loops ------------------
  int conv_out [6][26][26];
  task automatic conv_layer(input int h, input int w, input int kh, input int kw,
                            input int ci, input int co);
    int oh, ow, oc, r, c, ic, errs;
    longint acc, refv;
    oh = h - kh + 1;
    ow = w - kw + 1;
    cpu.load_bank(0, co);
    cpu.load_bank(1, oh);
    cpu.load_bank(2, ow);
    cpu.load_bank(3, ci);
    for (int a = 0; a < co; a++)
      for (int b = 0; b < oh; b++)
        for (int d = 0; d < ow; d++) conv_out[a][b][d] = 0;
    for (int a = 0; a < co; a++) begin
      cpu.get_next_iteration(0, oc);
      for (int b = 0; b < oh; b++) begin
        cpu.get_next_iteration(1, r);
        for (int d = 0; d < ow; d++) begin
          cpu.get_next_iteration(2, c);
          for (int e = 0; e < ci; e++) begin
            cpu.get_next_iteration(3, ic);
            acc = 0;
            for (int y = 0; y < kh; y++)
              for (int x = 0; x < kw; x++)
                acc += longint'(wgt(ic * 1000 + r + y, c + x, 5)) * wgt(oc * 10 + ic, y * kw + x, 6);
            conv_out[oc][r][c] += int'(acc);
          end
        end
      end
    end
    errs = 0;
    for (int a = 0; a < co; a++)
      for (int b = 0; b < oh; b++)
        for (int d = 0; d < ow; d++) begin
          refv = 0;
          for (int e = 0; e < ci; e++)
            for (int y = 0; y < kh; y++)
              for (int x = 0; x < kw; x++)
                refv += longint'(wgt(e * 1000 + b + y, d + x, 5)) * wgt(a * 10 + e, y * kw + x, 6);
          if (longint'(conv_out[a][b][d]) != refv) errs++;
          checks++;
        end
    failures += errs;
    if (errs != 0) $display("blackjack_tb: conv %0d outputs wrong", errs);
  endtask

  // ---- 2x2 max pooling of conv_out, three shuffled loops ---------------
  task automatic pool_layer(input int ch, input int ih, input int iw);
    int ph, pw, c, r, q, errs, m, refm;
    int pooled [6][13][13];
    bit done [6][13][13];
    ph = ih / 2;
    pw = iw / 2;
    for (int a = 0; a < ch; a++) for (int b = 0; b < ph; b++) for (int d = 0; d < pw; d++) done[a][b][d] = 0;
    cpu.load_bank(0, ch);
    cpu.load_bank(1, ph);
    cpu.load_bank(2, pw);
    for (int a = 0; a < ch; a++) begin
      cpu.get_next_iteration(0, c);
      for (int b = 0; b < ph; b++) begin
        cpu.get_next_iteration(1, r);
        for (int d = 0; d < pw; d++) begin
          cpu.get_next_iteration(2, q);
          m = conv_out[c][2*r][2*q];
          if (conv_out[c][2*r][2*q+1] > m)   m = conv_out[c][2*r][2*q+1];
          if (conv_out[c][2*r+1][2*q] > m)   m = conv_out[c][2*r+1][2*q];
          if (conv_out[c][2*r+1][2*q+1] > m) m = conv_out[c][2*r+1][2*q+1];
          pooled[c][r][q] = m;
          if (done[c][r][q]) failures++;
          done[c][r][q] = 1;
        end
      end
    end
    errs = 0;
    for (int a = 0; a < ch; a++)
      for (int b = 0; b < ph; b++)
        for (int d = 0; d < pw; d++) begin
          refm = conv_out[a][2*b][2*d];
          for (int y = 0; y < 2; y++)
            for (int x = 0; x < 2; x++)
              if (conv_out[a][2*b+y][2*d+x] > refm) refm = conv_out[a][2*b+y][2*d+x];
          if (!done[a][b][d] || pooled[a][b][d] != refm) errs++;
          checks++;
        end
    failures += errs;
    if (errs != 0) $display("blackjack_tb: pool %0d outputs wrong", errs);
  endtask

  initial begin
    int v, seen10, stalls_before;
    for (int b = 0; b < 4; b++) n_bank_used[b] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    expect_true(bank_armed == '0 && !stall && !rf_we, "outputs not idle after reset");

    // Published example: ten iterations in two bins, 0-4 and 5-9.
    cpu.shfl_ld(1, SET_CURRENT, 0, 0);
    cpu.shfl_ld(1, SET_MAX,     0, 4);
    cpu.shfl_ld(1, SET_CURRENT, 1, 5);
    cpu.shfl_ld(1, SET_MAX,     1, 9);
    expect_true(bank_armed == 4'b0010, "bank 1 not armed after load");
    // First read right after the load: the bank is still choosing -> stall.
    stalls_before = cpu.n_stall_cyc;
    cpu.gap = 0;
    seen10 = 0;
    for (int i = 0; i < 10; i++) begin
      cpu.get_next_iteration(1, v);
      if (v < 10) seen10 |= (1 << v);
    end
    expect_true(seen10 == 10'h3FF, $sformatf("10/2 example gave set %b", seen10));
    expect_true(cpu.n_stall_cyc > stalls_before, "no stall after load");
    cpu.gap = 7;

    // A read with the value ready completes in its own cycle, no stall.
    stalls_before = cpu.n_stall_cyc;
    repeat (5) @(negedge clk);
    cpu.get_next_iteration(1, v);
    expect_true(cpu.n_stall_cyc == stalls_before, "ready read stalled");

    // Register select beyond the set: ignored.
    cpu.shfl_ld(1, SET_MAX, 20, 3);
    // Wrong condition code: not executed (would clear bank 1's bins).
    cpu.issue_raw({4'b0000, SHFL_OPCODE, 2'd1, 1'b0, 7'd0, 10'd0}, 1'b0);
    seen10 = 0;
    for (int i = 0; i < 9; i++) begin    // rest of this pass
      cpu.get_next_iteration(1, v);
      if (v < 10) seen10 |= (1 << v);
    end
    cpu.get_next_iteration(1, v);        // 10th read of the pass
    if (v < 10) seen10 |= (1 << v);
    expect_true(seen10 == 10'h3FF, $sformatf("pass after ignored loads gave set %b", seen10));

    // mnist-mlp: 768 -> 128 -> 10.
    fc_layer(768, 128, 0, 1);
    fc_layer(128, 10, 2, 3);

    // mnist-cnn first stage: conv 3x3x1x6 on 28x28, then 2x2 max pool.
    conv_layer(28, 28, 3, 3, 1, 6);
    pool_layer(6, 26, 26);

    // Every mechanism must have happened.
    expect_true(n_redirect > 0, "arbiter never redirected");
    expect_true(n_disallow > 0, "no bin was ever disallowed");
    expect_true(n_rearm > 0, "no bank re-armed");
    expect_true(cpu.n_stall_cyc > 0, "no stall");
    expect_true(n_ignored > 0, "out-of-range register select not flagged");
    for (int b = 0; b < 4; b++) expect_true(n_bank_used[b] > 0, $sformatf("bank %0d never used", b));
    expect_true(cpu.n_rf_errors == 0, $sformatf("%0d reads without a same-cycle register write", cpu.n_rf_errors));
    $display("blackjack_tb: gni=%0d ld=%0d stall_cycles=%0d redirects=%0d disallows=%0d rearms=%0d ignored=%0d",
             cpu.n_gni, cpu.n_ld, cpu.n_stall_cyc, n_redirect, n_disallow, n_rearm, n_ignored);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
