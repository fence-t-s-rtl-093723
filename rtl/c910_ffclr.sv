// c910_ffclr: the ff.clr extension of an out-of-order RV64 core, as one unit.
//
// The software-supported temporal fence (fence.t.s) closes timing channels at
// a context switch by putting the whole core back into a known, untrained
// state. Software saves the architectural registers on the stack, writes the
// dirty L1 data cache back, invalidates the caches and branch predictors with
// the core's existing cache-maintenance operations, and then executes ff.clr.
// ff.clr resets every on-core flip-flop except the CSRs. That includes the
// register rename table, which mixes microarchitectural and architectural
// information: clearing it is safe only because software saved the logical
// registers first. The core then restarts at the address held in the CSR
// mrvbr, where software restores its registers and pads the whole sequence to
// a fixed worst-case time.
//
// This unit holds the hardware that ff.clr adds to the core:
//   * ffclr_decoder    tags ff.clr in the decode stage (or flags it illegal
//                      below machine mode);
//   * ffclr_reset_ctrl the core's synchronous reset controller, now with a
//                      CSR reset (power-on only) and a microarchitectural reset
//                      (power-on or ff.clr);
//   * mrvbr_csr        the reset-vector CSR that supplies the restart address.
// The rest of the core is outside: its decode stage drives id_*, its
// reorder buffer carries the is_ffclr tag to retirement and reports it on
// rtu_retire_ffclr_i, its CSR unit drives csr_*, every CSR flip-flop takes
// csr_rst_no, every other flip-flop takes uarch_rst_no, and the fetch unit
// loads restart_pc_o when restart_o pulses.
//
// Timing: decode is combinational; a retiring ff.clr holds uarch_rst_no low
// for CLR_CYCLES cycles starting the next cycle, followed by a one-cycle
// restart_o (see ffclr_reset_ctrl). The code around ff.clr places sync.i
// before and after it, so nothing else is in flight when it retires.
//
// Following the design description: ff.clr as the only added instruction,
// its effect (all flip-flops but the CSRs), the extended decoder and reset
// controller, the restart from mrvbr. This implementation's own choices: the
// encoding, the machine-mode restriction, the reset pulse length and the
// signal-level interface to the rest of the core.
module c910_ffclr
  import ffclr_pkg::*;
#(
  parameter int unsigned SYNC_STAGES = 2,
  parameter int unsigned CLR_CYCLES  = 4
) (
  input  logic            clk_i,
  input  logic            por_rst_ni,         // asynchronous power-on reset
  input  logic [XLEN-1:0] rvba_i,             // power-on reset base address
  input  priv_e           priv_i,             // current privilege level
  // decode stage
  input  logic            id_valid_i,
  input  logic [31:0]     id_insn_i,
  output logic            id_ffclr_o,         // tag: legal ff.clr
  output logic            id_ffclr_illegal_o, // ff.clr below machine mode
  // retire stage
  input  logic            rtu_retire_ffclr_i, // tagged ff.clr retires
  // CSR unit
  input  logic            csr_we_i,
  input  logic [11:0]     csr_addr_i,
  input  logic [XLEN-1:0] csr_wdata_i,
  output logic            csr_hit_o,
  output logic [XLEN-1:0] csr_rdata_o,
  // resets and restart
  output logic            csr_rst_no,         // to every CSR flip-flop
  output logic            uarch_rst_no,       // to every other flip-flop
  output logic            restart_o,          // fetch restarts ...
  output logic [XLEN-1:0] restart_pc_o,       // ... at this address
  output logic            ffclr_busy_o
);

  ffclr_decoder u_dec (
    .id_valid_i (id_valid_i),
    .id_insn_i  (id_insn_i),
    .priv_i     (priv_i),
    .is_ffclr_o (id_ffclr_o),
    .illegal_o  (id_ffclr_illegal_o)
  );

  ffclr_reset_ctrl #(
    .SYNC_STAGES (SYNC_STAGES),
    .CLR_CYCLES  (CLR_CYCLES)
  ) u_rst (
    .clk_i          (clk_i),
    .por_rst_ni     (por_rst_ni),
    .ffclr_retire_i (rtu_retire_ffclr_i),
    .csr_rst_no     (csr_rst_no),
    .uarch_rst_no   (uarch_rst_no),
    .restart_o      (restart_o),
    .busy_o         (ffclr_busy_o)
  );

  // mrvbr is a machine-level CSR: writes from lower levels are dropped here
  // (the CSR unit raises the illegal-instruction trap for them).
  mrvbr_csr u_mrvbr (
    .clk_i       (clk_i),
    .csr_rst_ni  (csr_rst_no),
    .rvba_i      (rvba_i),
    .csr_we_i    (csr_we_i && (priv_i == PRIV_M)),
    .csr_addr_i  (csr_addr_i),
    .csr_wdata_i (csr_wdata_i),
    .csr_hit_o   (csr_hit_o),
    .csr_rdata_o (csr_rdata_o),
    .mrvbr_o     (restart_pc_o)
  );

endmodule
