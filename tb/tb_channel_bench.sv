// tb_channel_bench: a prime-and-probe timing channel across a context switch,
// closed by ff.clr.
//
// This bench mirrors the channel measurement used to evaluate temporal
// partitioning, scaled down to what a flip-flop-only model can show. A Trojan
// and a spy take turns on one core. The core model holds a 128-entry
// predictor-like table of 1-bit "trained" flags in flip-flops of the
// microarchitectural reset domain (secrets range over 0..128, as in the branch
// history table measurement). For each secret s, the Trojan trains the first s
// entries. Then a context switch happens and the spy probes all 128 entries;
// a probe of a trained entry costs PENALTY extra cycles, so the spy's run time
// is its observation.
//
// The switch is run in two ways:
//   * plain: no fence, the table keeps the Trojan's training;
//   * fence: the switch runs the temporal fence; ff.clr is presented to the
//     unit's decoder in machine mode, carried down a DEPTH-stage pipeline
//     model, retired, and the unit's microarchitectural reset clears the
//     table; the switch is then padded to a fixed PAD cycles, as software
//     does.
// Checks: with the fence, the spy's time and the switch time are the same for
// every secret, and the table is clear when the spy starts; without the
// fence, the spy's time follows the secret exactly (128 + PENALTY * s), which
// shows the bench can see a channel when there is one. The number of distinct
// spy times is printed for both cases (1 means no channel).
module tb_channel_bench;
  import ffclr_pkg::*;

  localparam int ENTRIES = 128;
  localparam int PENALTY = 3;
  localparam int DEPTH   = 6;
  localparam int PAD     = 64;          // padded switch length in cycles
  localparam logic [63:0] BASE = 64'h8000_0000;

  logic        clk = 1'b0;
  logic        por_n;
  logic        id_valid, id_ffclr, id_ill, retire_ffclr;
  logic [31:0] id_insn;
  logic        csr_we, csr_hit;
  logic [63:0] csr_wdata, csr_rdata, restart_pc;
  logic        csr_rst_n, uarch_rst_n, restart, busy;

  c910_ffclr dut (
    .clk_i (clk), .por_rst_ni (por_n), .rvba_i (BASE), .priv_i (PRIV_M),
    .id_valid_i (id_valid), .id_insn_i (id_insn),
    .id_ffclr_o (id_ffclr), .id_ffclr_illegal_o (id_ill),
    .rtu_retire_ffclr_i (retire_ffclr),
    .csr_we_i (csr_we), .csr_addr_i (12'h7C7), .csr_wdata_i (csr_wdata),
    .csr_hit_o (csr_hit), .csr_rdata_o (csr_rdata),
    .csr_rst_no (csr_rst_n), .uarch_rst_no (uarch_rst_n),
    .restart_o (restart), .restart_pc_o (restart_pc), .ffclr_busy_o (busy)
  );

  always #5 clk = ~clk;

  // microarchitectural state of the core model
  logic [ENTRIES-1:0] trained;
  logic [DEPTH-1:0]   tag_pipe;     // ff.clr tag on its way to retirement
  logic               train_en;
  logic [6:0]         idx;

  assign retire_ffclr = tag_pipe[DEPTH-1];

  always_ff @(posedge clk) begin
    if (!uarch_rst_n) begin
      trained  <= '0;
      tag_pipe <= '0;
    end else begin
      if (train_en) trained[idx] <= 1'b1;
      tag_pipe <= {tag_pipe[DEPTH-2:0], id_valid && id_ffclr};
    end
  end

  int unsigned checks = 0, failures = 0;
  int unsigned n_clear = 0, n_restart = 0;
  int          spy_time [2][ENTRIES+1];
  int          switch_time [2][ENTRIES+1];

  task automatic fail(input string msg);
    failures++;
    if (failures <= 10) $display("FAIL at %0t: %s", $time, msg);
  endtask

  always @(negedge clk) if (busy) n_clear++;
  always @(negedge clk) if (restart && csr_rst_n) n_restart++;

  // Trojan: train the first s entries, one per cycle.
  task automatic trojan(input int s);
    for (int i = 0; i < s; i++) begin
      @(negedge clk) begin train_en = 1'b1; idx = 7'(i); end
    end
    @(negedge clk) train_en = 1'b0;
  endtask

  // Spy: probe every entry; trained entries cost PENALTY extra cycles.
  task automatic spy(output int cycles);
    cycles = 0;
    for (int i = 0; i < ENTRIES; i++) begin
      @(negedge clk);
      cycles++;
      if (trained[i]) repeat (PENALTY) begin @(negedge clk); cycles++; end
    end
  endtask

  // Context switch, optionally with the temporal fence around ff.clr.
  task automatic context_switch(input bit fence, output int cycles);
    cycles = 0;
    if (fence) begin
      // csrw mrvbr, <resume address>
      @(negedge clk) begin csr_we = 1'b1; csr_wdata = BASE + 64'h100; end
      cycles++;
      @(negedge clk) begin csr_we = 1'b0; id_valid = 1'b1; id_insn = 32'h0040000B; end
      cycles++;
      @(negedge clk) id_valid = 1'b0;
      cycles++;
      // wait for the core to come back at the resume address
      while (!restart && cycles < 1000) begin @(negedge clk); cycles++; end
      checks++;
      if (restart_pc != BASE + 64'h100) fail("restart not at the resume address");
      checks++;
      if (trained != '0) fail("table not cleared by ff.clr");
    end
    // software pads the switch to a fixed length
    checks++;
    if (cycles > PAD) fail($sformatf("switch took %0d cycles, more than the pad", cycles));
    while (cycles < PAD) begin @(negedge clk); cycles++; end
  endtask

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int distinct [2];
    train_en = 1'b0; idx = '0;
    id_valid = 1'b0; id_insn = 32'h13; csr_we = 1'b0; csr_wdata = '0;
    por_n = 1'b0;
    repeat (4) @(posedge clk);
    @(negedge clk) por_n = 1'b1;
    wait (uarch_rst_n);
    for (int mode = 0; mode < 2; mode++) begin
      for (int s = 0; s <= ENTRIES; s++) begin
        trojan(s);
        context_switch(mode == 1, switch_time[mode][s]);
        spy(spy_time[mode][s]);
        // The spy only reads the table. In the plain case the Trojan of
        // secret s finds the s-1 entries of the previous run still trained
        // and adds one, so the table holds exactly s trained entries.
      end
    end
    for (int mode = 0; mode < 2; mode++) begin
      distinct[mode] = 0;
      for (int s = 0; s <= ENTRIES; s++) begin
        bit seen;
        seen = 1'b0;
        for (int t = 0; t < s; t++) if (spy_time[mode][t] == spy_time[mode][s]) seen = 1'b1;
        if (!seen) distinct[mode]++;
      end
    end
    // plain switch: the spy sees the secret
    for (int s = 0; s <= ENTRIES; s++) begin
      checks++;
      if (spy_time[0][s] != ENTRIES + PENALTY * s)
        fail($sformatf("plain switch, secret %0d: spy time %0d, expected %0d", s, spy_time[0][s], ENTRIES + PENALTY * s));
    end
    // fenced switch: the spy sees nothing, and the switch time is constant
    for (int s = 0; s <= ENTRIES; s++) begin
      checks++;
      if (spy_time[1][s] != ENTRIES) fail($sformatf("fence, secret %0d: spy time %0d", s, spy_time[1][s]));
      checks++;
      if (switch_time[1][s] != PAD) fail($sformatf("fence, secret %0d: switch time %0d", s, switch_time[1][s]));
    end
    checks++;
    if (n_restart != ENTRIES + 1 + 1) fail($sformatf("%0d restarts", n_restart));
    checks++;
    if (n_clear != (ENTRIES + 1) * dut.CLR_CYCLES) fail($sformatf("%0d clear cycles", n_clear));
    $display("distinct spy times: plain switch %0d, fenced switch %0d (of %0d secrets)",
             distinct[0], distinct[1], ENTRIES + 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
