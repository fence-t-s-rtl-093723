// tb_c910_ffclr: end-to-end test of the ff.clr extension inside a small
// behavioural model of the core it belongs to.
//
// The core model is deliberately simple but keeps the pieces that make
// ff.clr necessary and dangerous:
//   * a register rename table (rat) mapping 32 logical registers onto a
//     64-entry physical register file (prf): both are microarchitectural
//     flip-flops, so ff.clr wipes the logical register values with them;
//   * a DEPTH-stage pipeline from decode to in-order retirement, with a
//     sync.i barrier (issues only into an empty pipeline, and nothing issues
//     behind it until it retires); a change of privilege level also lets
//     nothing issue behind it;
//   * the CSR sscratch, which like mrvbr lives in the CSR reset domain;
//   * an off-core memory holding the stack, untouched by any reset.
// All instruction effects happen at retirement. The model's decode stage
// presents each instruction word to the unit under test, carries the is_ffclr
// tag through the pipeline and reports it at retirement; its CSR writes to
// mrvbr go to the unit, and every model flip-flop takes the reset of its
// domain from the unit.
//
// The program is the temporal fence sequence: fill registers with random
// values (training the rename table), push all logical registers, save sp in
// sscratch, point mrvbr at the label after ff.clr, dcache.call, write mcor,
// sync.i, ff.clr, then at the label sync.i, restore sp from sscratch, pop all
// registers, and compare. It runs the fence three times with different data,
// then tries ff.clr in user mode, which must trap and leave the core alone.
//
// Checked: every logical register survives each fence; the rename table,
// physical registers and pipeline are at their reset values right after the
// restart; sscratch and mrvbr survive; fetch restarts at the label; the
// microarchitectural reset lasts CLR_CYCLES (read from the unit) cycles; the
// number of cycles from ff.clr retirement to the first retirement after it
// is the same for every fence; a user-mode ff.clr traps. Each mechanism
// (power-on restart, mrvbr write and read, ff.clr tag, clear, restart at
// mrvbr, sync.i stall, user-mode trap) is counted and must occur.
module tb_c910_ffclr;
  import ffclr_pkg::*;

  localparam int DEPTH = 6;                    // decode-to-retire stages of the model
  localparam logic [63:0] BASE = 64'h8000_0000; // power-on reset address
  localparam logic [63:0] STACK_TOP = 64'h9000_0400;
  localparam int STACK_WORDS = 128;

  typedef enum logic [3:0] {
    OP_LI, OP_ADDI_SP, OP_SD, OP_LD, OP_CSRW_SSCRATCH, OP_CSRR_SSCRATCH,
    OP_CSRW_MRVBR, OP_CSRR_MRVBR, OP_DCACHE_CALL, OP_CSRS_MCOR, OP_SYNC_I,
    OP_FFCLR, OP_CHECK, OP_PRIV, OP_HALT
  } op_e;

  typedef struct packed {
    op_e         op;
    logic [4:0]  rd;
    logic [63:0] imm;
    logic [31:0] insn;
  } instr_t;

  typedef struct packed {
    logic        valid;
    logic        ffclr;
    logic [63:0] pc;
    instr_t      in;
  } slot_t;

  // ---------------------------------------------------------------- DUT
  logic            clk = 1'b0;
  logic            por_n;
  priv_e           priv;
  logic            id_valid, id_ffclr, id_ill;
  logic [31:0]     id_insn;
  logic            retire_ffclr;
  logic            csr_we, csr_hit;
  logic [11:0]     csr_addr;
  logic [63:0]     csr_wdata, csr_rdata;
  logic            csr_rst_n, uarch_rst_n, restart, busy;
  logic [63:0]     restart_pc;

  c910_ffclr dut (
    .clk_i (clk), .por_rst_ni (por_n), .rvba_i (BASE), .priv_i (priv),
    .id_valid_i (id_valid), .id_insn_i (id_insn),
    .id_ffclr_o (id_ffclr), .id_ffclr_illegal_o (id_ill),
    .rtu_retire_ffclr_i (retire_ffclr),
    .csr_we_i (csr_we), .csr_addr_i (csr_addr), .csr_wdata_i (csr_wdata),
    .csr_hit_o (csr_hit), .csr_rdata_o (csr_rdata),
    .csr_rst_no (csr_rst_n), .uarch_rst_no (uarch_rst_n),
    .restart_o (restart), .restart_pc_o (restart_pc), .ffclr_busy_o (busy)
  );

  always #5 clk = ~clk;

  // ---------------------------------------------------------------- program
  instr_t      prog [1024];
  int          plen = 0;
  logic [63:0] expect_val [3][32];   // register values each fence must keep
  logic [63:0] label_pc   [3];       // address of the instruction after ff.clr

  function automatic void emit(op_e op, int rd = 0, logic [63:0] imm = '0);
    logic [31:0] w;
    unique case (op)
      OP_FFCLR:      w = 32'h0040000B;
      OP_SYNC_I:     w = 32'h01A0000B;
      OP_DCACHE_CALL: w = 32'h0010000B;
      default:       w = 32'h00000013 | (32'(plen) << 7);  // any other word
    endcase
    prog[plen] = '{op: op, rd: 5'(rd), imm: imm, insn: w};
    plen++;
  endfunction

  function automatic logic [63:0] pc_of(int idx);
    return BASE + 64'(idx) * 4;
  endfunction

  // One temporal fence, as in the published listing.
  function automatic void emit_fence(int f);
    emit(OP_ADDI_SP, 2, -64'(31 * 8));
    emit(OP_CSRW_SSCRATCH, 2);
    for (int r = 1; r < 32; r++) emit(OP_SD, r, 64'(r - 1) * 8);
    label_pc[f] = pc_of(plen + 7);            // la t0, post_ff_clr
    emit(OP_CSRW_MRVBR, 5, label_pc[f]);
    emit(OP_CSRR_MRVBR, 0, label_pc[f]);      // read back (checked)
    emit(OP_DCACHE_CALL);
    emit(OP_CSRS_MCOR, 0, 64'h70011);
    emit(OP_SYNC_I);
    emit(OP_FFCLR);
    emit(OP_CHECK, 0, 64'(f));                // never reached: flushed by reset
    // post_ff_clr:
    emit(OP_SYNC_I);
    emit(OP_CSRR_SSCRATCH, 2);
    for (int r = 1; r < 32; r++) if (r != 2) emit(OP_LD, r, 64'(r - 1) * 8);
    emit(OP_ADDI_SP, 2, 64'(31 * 8));
    emit(OP_CHECK, 1, 64'(f));                // compare all registers
  endfunction

  // ---------------------------------------------------------------- core model
  // microarchitectural state (reset by uarch_rst_n)
  logic [63:0] pc;
  logic        fetching;
  slot_t       pipe [DEPTH];
  logic [5:0]  rat [32];
  logic [63:0] prf [64];
  logic        barrier;          // a sync.i is in flight
  // CSR state (reset by csr_rst_n)
  logic [63:0] sscratch;
  // off-core memory
  logic [63:0] stack [STACK_WORDS];

  int unsigned checks = 0, failures = 0;
  int unsigned n_por_restart = 0, n_mrvbr_wr = 0, n_mrvbr_rd = 0, n_tag = 0,
               n_clear = 0, n_restart_label = 0, n_sync_stall = 0, n_trap = 0;
  int          clear_len = 0, since_ffclr = -1, fence_lat [3];
  int          fence_no = 0;
  logic        in_clear = 1'b0;

  task automatic fail(input string msg);
    failures++;
    if (failures <= 10) $display("FAIL at %0t: %s", $time, msg);
  endtask

  function automatic logic [63:0] rd_reg(int r);
    return (r == 0) ? 64'h0 : prf[rat[r]];
  endfunction

  // word index into the stack memory of sp + offset
  function automatic logic [6:0] stack_idx(logic [63:0] off);
    logic [63:0] a;
    a = rd_reg(2) + off - (STACK_TOP - 64'(STACK_WORDS) * 8);
    return a[9:3];
  endfunction

  function automatic logic pipe_empty();
    for (int s = 0; s < DEPTH; s++) if (pipe[s].valid) return 1'b0;
    return 1'b1;
  endfunction

  instr_t cur;
  logic   can_issue;
  slot_t  last;

  always_comb begin
    int idx;
    idx      = int'((pc - BASE) >> 2);
    cur      = (idx >= 0 && idx < plen) ? prog[idx] : '{op: OP_HALT, rd: 0, imm: 0, insn: 32'h13};
    last     = pipe[DEPTH-1];
    can_issue = fetching && cur.op != OP_HALT && !barrier && !(cur.op == OP_SYNC_I && !pipe_empty());
    id_valid = can_issue;
    id_insn  = cur.insn;
    retire_ffclr = last.valid && last.ffclr;
    csr_we    = last.valid && last.in.op == OP_CSRW_MRVBR;
    csr_addr  = (last.valid && last.in.op inside {OP_CSRW_MRVBR, OP_CSRR_MRVBR}) ? 12'h7C7 : 12'h340;
    csr_wdata = last.in.imm;
  end

  // CSR domain
  always_ff @(posedge clk) begin
    if (!csr_rst_n) sscratch <= '0;
    else if (uarch_rst_n && last.valid && last.in.op == OP_CSRW_SSCRATCH) sscratch <= rd_reg(2);
  end

  // privilege: an architectural mode, kept by the model outside the clear
  always_ff @(posedge clk) begin
    if (!csr_rst_n) priv <= PRIV_M;
    else if (uarch_rst_n && last.valid && last.in.op == OP_PRIV) priv <= priv_e'(last.in.imm[1:0]);
  end

  // off-core stack memory
  always_ff @(posedge clk) begin
    if (uarch_rst_n && last.valid && last.in.op == OP_SD)
      stack[stack_idx(last.in.imm)] <= rd_reg(int'(last.in.rd));
  end

  // microarchitectural domain: everything ff.clr clears
  always_ff @(posedge clk) begin
    if (!uarch_rst_n) begin
      pc       <= '0;
      fetching <= 1'b0;
      barrier  <= 1'b0;
      for (int s = 0; s < DEPTH; s++) pipe[s] <= '0;
      for (int r = 0; r < 32; r++) rat[r] <= 6'(r);
      for (int p = 0; p < 64; p++) prf[p] <= '0;
    end else begin
      if (restart) begin
        pc       <= restart_pc;
        fetching <= 1'b1;
      end
      // retire (in order, all effects here)
      if (last.valid) begin
        unique case (last.in.op)
          OP_LI, OP_ADDI_SP, OP_LD, OP_CSRR_SSCRATCH: begin
            logic [63:0] v;
            logic [5:0]  p;
            logic        used;
            unique case (last.in.op)
              OP_LI:            v = last.in.imm;
              OP_ADDI_SP:       v = rd_reg(2) + last.in.imm;
              OP_LD:            v = stack[stack_idx(last.in.imm)];
              default:          v = sscratch;
            endcase
            // rename: pick the lowest free physical register
            p = '0;
            for (int c = 63; c >= 1; c--) begin
              used = 1'b0;
              for (int r = 0; r < 32; r++) if (rat[r] == 6'(c)) used = 1'b1;
              if (!used) p = 6'(c);
            end
            rat[last.in.rd] <= p;
            prf[p]          <= v;
          end
          OP_SYNC_I, OP_PRIV: barrier <= 1'b0;
          default: ;
        endcase
      end
      for (int s = DEPTH - 1; s > 0; s--) pipe[s] <= pipe[s-1];
      pipe[0] <= '0;
      if (can_issue && !restart) begin
        if (id_ill) begin
          pc <= pc + 4;           // trap handler model: skip the instruction
        end else begin
          pipe[0] <= '{valid: 1'b1, ffclr: id_ffclr, pc: pc, in: cur};
          pc      <= pc + 4;
          // sync.i and a privilege change let nothing issue behind them
          if (cur.op inside {OP_SYNC_I, OP_PRIV}) barrier <= 1'b1;
        end
      end
    end
  end

  // ---------------------------------------------------------------- monitors
  // Monitors sample at the falling edge, where all signals are settled.
  always @(negedge clk) begin
    // length of every microarchitectural clear
    if (csr_rst_n && !uarch_rst_n && busy) begin
      in_clear  = 1'b1;
      clear_len++;
      // while clearing, the CSR reset stays inactive
      checks++;
      if (!csr_rst_n) fail("CSR reset during ff.clr");
    end
    if (restart) begin
      checks++;
      if (!uarch_rst_n) fail("restart while in reset");
      if (in_clear) begin
        checks++;
        if (clear_len != dut.CLR_CYCLES) fail($sformatf("clear lasted %0d cycles", clear_len));
        n_clear++;
        // state right after the clear: reset values everywhere
        checks++;
        begin
          logic ok;
          ok = pipe_empty() && !barrier;
          for (int r = 0; r < 32; r++) if (rat[r] != 6'(r)) ok = 1'b0;
          for (int p = 0; p < 64; p++) if (prf[p] != 0) ok = 1'b0;
          if (!ok) fail("microarchitectural state not cleared");
        end
        checks++;
        if (restart_pc != label_pc[fence_no]) fail("restart address is not the label");
        else n_restart_label++;
        checks++;
        if (sscratch == 0) fail("sscratch lost");
      end else begin
        n_por_restart++;
        checks++;
        if (restart_pc != BASE) fail("power-on restart not at reset base");
      end
      in_clear  = 1'b0;
      clear_len = 0;
    end
    // time from ff.clr retirement to the first retirement after the restart
    if (since_ffclr >= 0) since_ffclr++;
    if (since_ffclr > 0 && last.valid && uarch_rst_n) begin
      fence_lat[fence_no] = since_ffclr;
      since_ffclr = -1;
    end
    if (retire_ffclr && uarch_rst_n) since_ffclr = 0;
  end

  always @(negedge clk) if (uarch_rst_n) begin
    if (id_ffclr && can_issue) n_tag++;
    if (id_ill && can_issue) n_trap++;
    if (fetching && cur.op == OP_SYNC_I && !can_issue && !pipe_empty()) n_sync_stall++;
    if (last.valid) begin
      unique case (last.in.op)
        OP_CSRW_MRVBR: n_mrvbr_wr++;
        OP_CSRR_MRVBR: begin
          n_mrvbr_rd++;
          checks++;
          if (!csr_hit || csr_rdata != last.in.imm) fail("mrvbr read back wrong");
        end
        OP_CHECK: begin
          if (last.in.rd == 0) begin
            checks++;
            fail("instruction after ff.clr retired before the reset");
          end else begin
            int f;
            f = int'(last.in.imm);
            for (int r = 1; r < 32; r++) begin
              checks++;
              if (rd_reg(r) != expect_val[f][r])
                fail($sformatf("fence %0d: x%0d = %h, expected %h", f, r, rd_reg(r), expect_val[f][r]));
            end
            fence_no = f + 1;
          end
        end
        default: ;
      endcase
    end
  end

  // ---------------------------------------------------------------- stimulus
  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // program: three fences with fresh register contents, then user mode
    for (int f = 0; f < 3; f++) begin
      if (f == 0) emit(OP_LI, 2, STACK_TOP);
      expect_val[f][2] = STACK_TOP;
      for (int r = 1; r < 32; r++) if (r != 2) begin
        expect_val[f][r] = {$urandom, $urandom};
        emit(OP_LI, r, expect_val[f][r]);
      end
      // extra renames of a few registers train the table differently each time
      for (int k = 0; k < 5 * f + 3; k++) begin
        int r;
        r = $urandom_range(3, 31);
        emit(OP_LI, r, expect_val[f][r]);
      end
      emit_fence(f);
    end
    emit(OP_PRIV, 0, 64'(PRIV_U));
    emit(OP_FFCLR);                  // must trap in user mode
    emit(OP_LI, 1, 64'h1234);
    emit(OP_HALT);

    por_n = 1'b0;
    repeat (4) @(posedge clk);
    @(negedge clk) por_n = 1'b1;
    wait (cur.op == OP_HALT && fetching);
    repeat (2 * DEPTH) @(posedge clk);
    #2;

    checks++;
    if (fence_no != 3) fail($sformatf("only %0d fences completed", fence_no));
    checks++;
    if (rd_reg(1) != 64'h1234)
      fail($sformatf("execution did not continue after the user-mode ff.clr: x1=%h pc=%h", rd_reg(1), pc));
    checks++;
    if (!(fence_lat[0] == fence_lat[1] && fence_lat[1] == fence_lat[2]))
      fail($sformatf("fence latencies differ: %0d %0d %0d", fence_lat[0], fence_lat[1], fence_lat[2]));
    checks++;
    if (fence_lat[0] != dut.CLR_CYCLES + 2 + DEPTH)
      fail($sformatf("ff.clr to next retirement took %0d cycles, expected %0d", fence_lat[0], dut.CLR_CYCLES + 2 + DEPTH));
    // every mechanism must have occurred
    checks++; if (n_por_restart != 1) fail("power-on restart count");
    checks++; if (n_mrvbr_wr != 3)    fail("mrvbr writes");
    checks++; if (n_mrvbr_rd != 3)    fail("mrvbr reads");
    checks++; if (n_tag != 3)         fail("ff.clr tags");
    checks++; if (n_clear != 3)       fail("ff.clr clears");
    checks++; if (n_restart_label != 3) fail("restarts at label");
    checks++; if (n_sync_stall == 0)  fail("sync.i never stalled");
    checks++; if (n_trap != 1)        fail("user-mode ff.clr traps");
    $display("mechanisms: por_restart=%0d mrvbr_wr=%0d mrvbr_rd=%0d ffclr_tag=%0d clear=%0d restart_at_label=%0d sync_i_stall=%0d user_trap=%0d latency=%0d",
             n_por_restart, n_mrvbr_wr, n_mrvbr_rd, n_tag, n_clear, n_restart_label, n_sync_stall, n_trap, fence_lat[0]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
