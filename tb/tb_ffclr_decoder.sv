// tb_ffclr_decoder: self-checking test of the ff.clr decode extension.
//
// Drives the exact ff.clr word, every single-bit corruption of it, and random
// words, each at every privilege level and with valid high and low. The
// expected tag and illegal flag are computed here from the literal encoding
// (custom-0 word 0x0040000B, legal in machine mode only), independently of
// the package constant the decoder uses.
module tb_ffclr_decoder;
  import ffclr_pkg::*;

  logic        valid;
  logic [31:0] insn;
  priv_e       priv;
  logic        is_ffclr, illegal;
  int unsigned checks = 0, failures = 0;

  ffclr_decoder dut (
    .id_valid_i (valid),
    .id_insn_i  (insn),
    .priv_i     (priv),
    .is_ffclr_o (is_ffclr),
    .illegal_o  (illegal)
  );

  task automatic check_one(input logic v, input logic [31:0] w, input priv_e p);
    logic exp_tag, exp_ill;
    valid = v; insn = w; priv = p;
    #1;
    exp_tag = v && (w == 32'h0040000B) && (p == PRIV_M);
    exp_ill = v && (w == 32'h0040000B) && (p != PRIV_M);
    checks++;
    if (is_ffclr !== exp_tag || illegal !== exp_ill) begin
      failures++;
      if (failures <= 10) $display("FAIL insn=%h valid=%b priv=%0d: tag=%b(exp %b) ill=%b(exp %b)",
               w, v, p, is_ffclr, exp_tag, illegal, exp_ill);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    static priv_e levels [3] = '{PRIV_U, PRIV_S, PRIV_M};
    foreach (levels[l]) begin
      check_one(1'b1, 32'h0040000B, levels[l]);
      check_one(1'b0, 32'h0040000B, levels[l]);
      for (int b = 0; b < 32; b++) check_one(1'b1, 32'h0040000B ^ (32'h1 << b), levels[l]);
      // neighbouring vendor custom-0 words: dcache.call, sync.i
      check_one(1'b1, 32'h0010000B, levels[l]);
      check_one(1'b1, 32'h01A0000B, levels[l]);
      for (int i = 0; i < 200; i++) check_one(1'($urandom), $urandom, levels[l]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
