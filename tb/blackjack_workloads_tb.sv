// blackjack_workloads_tb: runs the loop nests of the evaluated networks'
// layers through the shuffling unit at its default size.
//
// For each fully connected layer (inputs x outputs) whose loops fit the
// 10-bit count registers, the behavioural core loads one bank with the
// output count and one with the input count and walks the whole layer with
// SHFL_GNI, exactly as the shuffled software would. The testbench checks that
// every (output, input) weight index is visited exactly once per layer, and
// that the inner order differs between neurons. Layers (inputs x outputs):
//   kws-mlp     250x144, 144x144, 144x10
//   ecg-ae      128x1024, 1024x1024, 1024x140
//   mnist-cnn   150x20, 20x10, and the 3x3, 6 -> 6 channel convolution loops
//               on its 13x13 pooled map (four banks)
//   har-cnn     128x128, 128x6
//   gesture-cnn 128x10
// Loops longer than 1024 iterations (har-cnn 5632x128, gesture-cnn
// 5760x128, seizure-svm 2854x179) cannot be loaded into 10-bit registers
// and are not run. mnist-mlp runs in blackjack_tb.
module blackjack_workloads_tb;
  import blackjack_pkg::*;
  localparam int unsigned K = K_DEFAULT;

  logic        clk = 1'b0, rst_n = 1'b0;
  logic        instr_valid, instr_is_gni, stall, ld_ignored, rf_we;
  logic [31:0] instr, rf_wdata;
  logic [3:0]  rf_waddr;
  logic [$clog2(K)-1:0] trng_bits = '0;
  logic [NUM_BANKS_DEF-1:0] bank_armed;

  int unsigned checks = 0, failures = 0;

  blackjack dut (
    .clk, .rst_n, .instr_valid, .instr_is_gni, .instr, .stall, .ld_ignored,
    .rf_we, .rf_waddr, .rf_wdata, .trng_bits, .bank_armed);

  bj_cpu_model #(.K(K)) cpu (
    .clk, .instr_valid, .instr_is_gni, .instr, .stall, .rf_we, .rf_waddr, .rf_wdata);

  always #5 clk = ~clk;
  always @(negedge clk) trng_bits <= $clog2(K)'($urandom);

  initial begin : watchdog
    repeat (60_000_000) @(posedge clk);
    failures++;
    $display("blackjack_workloads_tb: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_true(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("blackjack_workloads_tb @%0t: %s", $time, what);
    end
  endtask

  task automatic fc_loops(input string net, input int n_in, input int n_out);
    bit visited [];
    int r_i, r_j, bad, same;
    int first_order [16];
    visited = new[n_in * n_out];
    foreach (visited[x]) visited[x] = 0;
    cpu.load_bank(0, n_out);
    cpu.load_bank(1, n_in);
    bad = 0;
    same = 0;
    for (int o = 0; o < n_out; o++) begin
      cpu.get_next_iteration(0, r_i);
      for (int i = 0; i < n_in; i++) begin
        cpu.get_next_iteration(1, r_j);
        if (r_i >= n_out || r_j >= n_in || visited[r_i * n_in + r_j]) bad++;
        else visited[r_i * n_in + r_j] = 1;
        if (i < 16) begin
          if (o == 0) first_order[i] = r_j;
          else if (first_order[i] == r_j) same++;
        end
      end
    end
    foreach (visited[x]) if (!visited[x]) bad++;
    expect_true(bad == 0, $sformatf("%s %0dx%0d: %0d index pairs wrong", net, n_in, n_out, bad));
    if (n_out > 2)
      expect_true(same < 16 * (n_out - 1), $sformatf("%s %0dx%0d: inner order never changed", net, n_in, n_out));
    $display("blackjack_workloads_tb: %s F(%0dx%0d) done, %0d reads so far", net, n_in, n_out, cpu.n_gni);
  endtask

  // Convolution loop nest: output channel, row, column, input channel.
  task automatic conv_loops(input string net, input int oh, input int ow, input int ci, input int co);
    bit visited [];
    int oc, r, c, ic, bad;
    visited = new[co * oh * ow * ci];
    foreach (visited[x]) visited[x] = 0;
    cpu.load_bank(0, co);
    cpu.load_bank(1, oh);
    cpu.load_bank(2, ow);
    cpu.load_bank(3, ci);
    bad = 0;
    for (int a = 0; a < co; a++) begin
      cpu.get_next_iteration(0, oc);
      for (int b = 0; b < oh; b++) begin
        cpu.get_next_iteration(1, r);
        for (int d = 0; d < ow; d++) begin
          cpu.get_next_iteration(2, c);
          for (int e = 0; e < ci; e++) begin
            int idx;
            cpu.get_next_iteration(3, ic);
            idx = ((oc * oh + r) * ow + c) * ci + ic;
            if (oc >= co || r >= oh || c >= ow || ic >= ci || visited[idx]) bad++;
            else visited[idx] = 1;
          end
        end
      end
    end
    foreach (visited[x]) if (!visited[x]) bad++;
    expect_true(bad == 0, $sformatf("%s conv: %0d index tuples wrong", net, bad));
    $display("blackjack_workloads_tb: %s conv %0dx%0dx%0dx%0d done", net, oh, ow, ci, co);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    fc_loops("kws-mlp", 250, 144);
    fc_loops("kws-mlp", 144, 144);
    fc_loops("kws-mlp", 144, 10);
    fc_loops("mnist-cnn", 150, 20);
    fc_loops("mnist-cnn", 20, 10);
    conv_loops("mnist-cnn", 11, 11, 6, 6);
    fc_loops("har-cnn", 128, 128);
    fc_loops("har-cnn", 128, 6);
    fc_loops("gesture-cnn", 128, 10);
    fc_loops("ecg-ae", 128, 1024);
    fc_loops("ecg-ae", 1024, 1024);
    fc_loops("ecg-ae", 1024, 140);
    expect_true(cpu.n_rf_errors == 0, "read without same-cycle register write");
    $display("blackjack_workloads_tb: %0d reads, %0d stall cycles", cpu.n_gni, cpu.n_stall_cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
