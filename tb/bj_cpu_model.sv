// bj_cpu_model: behavioural stand-in for the host core and its shuffling
// library, used by the top-level testbenches.
//
// It drives the shuffler's instruction port the way a core would: one
// instruction per cycle, holding a SHFL_GNI while `stall` is high, and
// leaving `gap` idle cycles after each SHFL_GNI (the core's work on the loop
// body; seven cycles between reads in the published analysis). It also
// implements the library routine load_bank(): [0, n) is cut into at most K
// contiguous bins of ceil(n/K) iterations, and for each bin the first
// iteration goes to the current count set and the last to the max count set
// (bin 0 first). It checks that a completed SHFL_GNI writes the register file
// in the same cycle, to the requested Rd, and counts stall cycles.
// Not synthesizable; testbench only.
module bj_cpu_model #(
  parameter int unsigned K = 16
) (
  input  logic        clk,
  output logic        instr_valid,
  output logic        instr_is_gni,
  output logic [31:0] instr,
  input  logic        stall,
  input  logic        rf_we,
  input  logic [3:0]  rf_waddr,
  input  logic [31:0] rf_wdata
);
  import blackjack_pkg::*;

  int unsigned gap          = 7;
  int unsigned n_stall_cyc  = 0;
  int unsigned n_gni        = 0;
  int unsigned n_ld         = 0;
  int unsigned n_rf_errors  = 0;

  initial begin
    instr_valid  = 1'b0;
    instr_is_gni = 1'b0;
    instr        = '0;
  end

  // Issue a raw instruction word for one cycle.
  task automatic issue_raw(input logic [31:0] word, input logic is_gni);
    @(negedge clk);
    instr_valid  = 1'b1;
    instr_is_gni = is_gni;
    instr        = word;
    @(negedge clk);
    instr_valid  = 1'b0;
  endtask

  task automatic shfl_ld(input int bank, input set_e s, input int r, input int v);
    issue_raw(enc_ld(2'(bank), s, 7'(r), 10'(v)), 1'b0);
    n_ld++;
  endtask

  // get_next_iteration(): SHFL_GNI, wait through stalls, return the value.
  task automatic get_next_iteration(input int bank, output int value);
    logic [3:0] rd;
    rd = 4'($urandom);
    @(negedge clk);
    instr_valid  = 1'b1;
    instr_is_gni = 1'b1;
    instr        = enc_gni(2'(bank), rd);
    #1;
    while (stall) begin
      n_stall_cyc++;
      @(negedge clk);
      #1;
    end
    if (!rf_we || rf_waddr != rd) n_rf_errors++;
    value = int'(rf_wdata);
    n_gni++;
    @(negedge clk);
    instr_valid = 1'b0;
    repeat (gap) @(negedge clk);
  endtask

  task automatic load_bank(input int bank, input int n);
    int a;
    a = (n + int'(K) - 1) / int'(K);
    for (int r = 0; r < int'(K); r++) begin
      int first, last;
      first = r * a;
      last  = (r + 1) * a - 1;
      if (last > n - 1) last = n - 1;
      if (first <= last) begin
        shfl_ld(bank, SET_CURRENT, r, first);
        shfl_ld(bank, SET_MAX, r, last);
      end
    end
  endtask

endmodule
