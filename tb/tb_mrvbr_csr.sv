// tb_mrvbr_csr: self-checking test of the reset-vector CSR.
//
// Checks the power-on value (the strapped base address with bit 0 cleared),
// writes to mrvbr and to other CSR numbers, the read port and its hit flag,
// and that the register keeps its value while the CSR reset is inactive. The
// expected register value is tracked by a separate model in this bench.
module tb_mrvbr_csr;
  localparam int W = 64;

  logic         clk = 1'b0;
  logic         rst_n;
  logic [W-1:0] rvba, wdata, rdata, mrvbr;
  logic         we, hit;
  logic [11:0]  addr;
  logic [W-1:0] model;
  int unsigned  checks = 0, failures = 0;

  mrvbr_csr dut (
    .clk_i (clk), .csr_rst_ni (rst_n), .rvba_i (rvba),
    .csr_we_i (we), .csr_addr_i (addr), .csr_wdata_i (wdata),
    .csr_hit_o (hit), .csr_rdata_o (rdata), .mrvbr_o (mrvbr)
  );

  always #5 clk = ~clk;

  task automatic expect_eq(input string what, input logic [W-1:0] got, input logic [W-1:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures <= 10) $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; addr = 12'h7C7; wdata = '0; rvba = 64'h0000_0000_8000_0001; rst_n = 0;
    @(posedge clk); @(posedge clk); #1;
    expect_eq("power-on value", mrvbr, 64'h0000_0000_8000_0000);
    rst_n = 1;
    model = 64'h0000_0000_8000_0000;
    rvba = 64'h1234;  // strap changes after reset: must not matter
    for (int i = 0; i < 300; i++) begin
      we    = 1'($urandom);
      addr  = ($urandom_range(0, 2) == 0) ? 12'h7C7 : 12'($urandom);
      wdata = {$urandom, $urandom};
      #1;
      checks++;
      if (hit !== (addr == 12'h7C7)) begin failures++; if (failures <= 10) $display("FAIL hit addr=%h", addr); end
      expect_eq("read data", rdata, (addr == 12'h7C7) ? model : '0);
      @(posedge clk);
      if (we && addr == 12'h7C7) model = {wdata[W-1:1], 1'b0};
      #1;
      expect_eq("mrvbr", mrvbr, model);
    end
    // CSR reset brings the strap back
    rst_n = 0; rvba = 64'h0000_00FF_0000_0002; @(posedge clk); #1;
    expect_eq("reset value", mrvbr, 64'h0000_00FF_0000_0002);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
