// shfl_decoder_tb: self-checking test of the instruction field decoder.
//
// Builds SHFL_LD and SHFL_GNI words field by field (independently of the
// package helpers), decodes them and checks every field, then checks that
// words with a wrong condition code or opcode, or with no instruction issued,
// are not decoded as valid.
module shfl_decoder_tb;
  import blackjack_pkg::*;

  logic        instr_valid, is_gni;
  logic [31:0] instr;
  shfl_instr_t dec;
  int unsigned checks = 0, failures = 0;
  logic        clk = 1'b0;

  shfl_decoder dut (.instr_valid, .is_gni, .instr, .dec);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(input int got, input int exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("shfl_decoder_tb: %s = %0d, expected %0d (instr %h)", what, got, exp, instr);
    end
  endtask

  initial begin
    for (int n = 0; n < 3000; n++) begin
      int bank, set, rs, val, rd;
      bank = $urandom % 4; set = $urandom % 2; rs = $urandom % 128; val = $urandom % 1024;
      // SHFL_LD: 1110 | 00110000 | bank | set | regsel | value
      instr = (32'hE << 28) | (32'h30 << 20) | (bank << 18) | (set << 17) | (rs << 10) | val;
      instr_valid = 1; is_gni = 0;
      #1;
      expect_eq(int'(dec.valid), 1, "ld.valid");
      expect_eq(int'(dec.op), int'(OP_LD), "ld.op");
      expect_eq(int'(dec.bank), bank, "ld.bank");
      expect_eq(int'(dec.set), set, "ld.set");
      expect_eq(int'(dec.regsel), rs, "ld.regsel");
      expect_eq(int'(dec.value), val, "ld.value");
      // SHFL_GNI: 1110 | 00110000 | bank | unused | rd
      rd = $urandom % 16;
      instr = (32'hE << 28) | (32'h30 << 20) | (bank << 18) | rd;
      is_gni = 1;
      #1;
      expect_eq(int'(dec.valid), 1, "gni.valid");
      expect_eq(int'(dec.op), int'(OP_GNI), "gni.op");
      expect_eq(int'(dec.bank), bank, "gni.bank");
      expect_eq(int'(dec.rd), rd, "gni.rd");
      // wrong condition code
      instr = (32'(($urandom % 14)) << 28) | (32'h30 << 20) | (bank << 18);
      #1 expect_eq(int'(dec.valid), 0, "badcond.valid");
      // wrong opcode
      instr = (32'hE << 28) | (32'(8'h31 + ($urandom % 200)) << 20);
      #1 expect_eq(int'(dec.valid), 0, "badop.valid");
      // not issued
      instr = (32'hE << 28) | (32'h30 << 20);
      instr_valid = 0;
      #1 expect_eq(int'(dec.valid), 0, "idle.valid");
    end
    // the package encoders agree with the field layout
    instr_valid = 1; is_gni = 0;
    instr = enc_ld(2'd2, SET_MAX, 7'd5, 10'd999);
    #1;
    expect_eq(int'(instr), int'(32'hE30A_17E7), "enc_ld word");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
