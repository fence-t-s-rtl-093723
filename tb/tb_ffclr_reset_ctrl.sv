// tb_ffclr_reset_ctrl: self-checking test of the reset controller.
//
// Two instances are tested: one with the default parameters (2-stage
// synchroniser, 4-cycle clear) and one with a 3-stage synchroniser and a
// 1-cycle clear. For each, the bench checks cycle by cycle:
//   * power-on: csr_rst_no is released SYNC_STAGES edges after por_rst_ni,
//     uarch_rst_no one edge later together with a single restart_o pulse;
//   * ff.clr: a one-cycle retire holds uarch_rst_no low for exactly
//     CLR_CYCLES cycles, busy_o high for the same cycles, then a single
//     restart_o pulse, while csr_rst_no never drops;
//   * back-to-back ff.clr right after a restart, and random gaps;
//   * power-on reset arriving in the middle of a clear.
// The expected cycle counts come from the parameters, not from the design.
module tb_ffclr_reset_ctrl;

  localparam int unsigned S [2] = '{2, 3};
  localparam int unsigned C [2] = '{4, 1};

  logic       clk = 1'b0;
  logic       por_n;
  logic [1:0] retire;
  logic [1:0] csr_n, uarch_n, restart, busy;
  int unsigned checks = 0, failures = 0;

  ffclr_reset_ctrl dut0 (
    .clk_i (clk), .por_rst_ni (por_n), .ffclr_retire_i (retire[0]),
    .csr_rst_no (csr_n[0]), .uarch_rst_no (uarch_n[0]), .restart_o (restart[0]), .busy_o (busy[0]));

  ffclr_reset_ctrl #(.SYNC_STAGES (3), .CLR_CYCLES (1)) dut1 (
    .clk_i (clk), .por_rst_ni (por_n), .ffclr_retire_i (retire[1]),
    .csr_rst_no (csr_n[1]), .uarch_rst_no (uarch_n[1]), .restart_o (restart[1]), .busy_o (busy[1]));

  always #5 clk = ~clk;

  task automatic expect_bits(input string what, input int d, input logic [3:0] got, input logic [3:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures <= 10) $display("FAIL dut%0d %s at %0t: {csr,uarch,restart,busy}=%b expected %b", d, what, $time, got, exp);
    end
  endtask

  function automatic logic [3:0] outs(input int d);
    return {csr_n[d], uarch_n[d], restart[d], busy[d]};
  endfunction

  // Power-on sequence for both instances; leaves them in normal run.
  task automatic power_on();
    int unsigned n;
    por_n = 1'b0; retire = '0;
    repeat (3) @(posedge clk);
    #1;
    for (int d = 0; d < 2; d++) expect_bits("in por", d, outs(d), 4'b0000);
    @(negedge clk) por_n = 1'b1;
    for (n = 1; n <= 3; n++) begin
      @(posedge clk); #1;
      for (int d = 0; d < 2; d++)
        if (n == S[d])       expect_bits("csr released", d, outs(d), 4'b1000);
        else if (n == S[d] + 1) expect_bits("uarch released", d, outs(d), 4'b1110);
        else if (n < S[d])   expect_bits("still in por", d, outs(d), 4'b0000);
    end
    repeat (2) @(posedge clk);
    #1;
    for (int d = 0; d < 2; d++) expect_bits("running", d, outs(d), 4'b1100);
  endtask

  // One ff.clr on instance d, retiring at the next rising edge.
  task automatic ffclr(input int d);
    int unsigned low = 0;
    @(negedge clk) retire[d] = 1'b1;
    @(posedge clk); #1;
    retire[d] = 1'b0;
    while (!uarch_n[d] && low < 50) begin
      expect_bits("clearing", d, outs(d), 4'b1001);
      expect_bits("other instance untouched", 1 - d, outs(1 - d), 4'b1100);
      low++;
      @(posedge clk); #1;
    end
    checks++;
    if (low != C[d]) begin
      failures++;
      if (failures <= 10) $display("FAIL dut%0d: uarch reset held %0d cycles, expected %0d", d, low, C[d]);
    end
    expect_bits("restart pulse", d, outs(d), 4'b1110);
    @(posedge clk); #1;
    expect_bits("after restart", d, outs(d), 4'b1100);
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    power_on();
    for (int i = 0; i < 40; i++) begin
      int d = i % 2;
      ffclr(d);
      repeat ($urandom_range(0, 4)) begin
        @(posedge clk); #1;
        expect_bits("idle", d, outs(d), 4'b1100);
      end
    end
    // back-to-back: retire in the very cycle after restart
    for (int d = 0; d < 2; d++) begin ffclr(d); ffclr(d); end
    // power-on reset in the middle of a clear of instance 0
    @(negedge clk) retire[0] = 1'b1;
    @(posedge clk); #1; retire[0] = 1'b0;
    expect_bits("clear started", 0, outs(0), 4'b1001);
    #2 por_n = 1'b0; #1;
    for (int d = 0; d < 2; d++) expect_bits("async por", d, outs(d), 4'b0000);
    power_on();
    ffclr(0);
    ffclr(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
