// ffclr_pkg: shared constants and types of the ff.clr (flip-flop clear)
// extension.
//
// ff.clr is the one hardware addition that the software-supported temporal
// fence needs in an out-of-order RISC-V core: an instruction that clears every
// on-core flip-flop except the control and status registers (CSRs), after
// which the core resumes at the address held in the reset-vector CSR mrvbr.
//
// Numbers taken from the design description: the core is RV64 (XLEN = 64).
// Everything else here is this implementation's own choice, because no
// encoding is published for ff.clr:
//   * FFCLR_INSN sits in the custom-0 opcode space (opcode 7'b0001011) that the
//     core's vendor extension already uses for its cache and sync
//     instructions, at a word that those instructions leave free.
//   * CSR_MRVBR is the CSR number the core's vendor documentation gives for
//     mrvbr (0x7C7).
package ffclr_pkg;

  // Register width of the RV64 core.
  parameter int unsigned XLEN = 64;

  // Fixed 32-bit instruction word of ff.clr (no operands).
  parameter logic [31:0] FFCLR_INSN = 32'h0040_000B;

  // CSR address of the machine reset-vector base register.
  parameter logic [11:0] CSR_MRVBR = 12'h7C7;

  // RISC-V privilege levels.
  typedef enum logic [1:0] {
    PRIV_U = 2'b00,
    PRIV_S = 2'b01,
    PRIV_M = 2'b11
  } priv_e;

  // States of the reset controller.
  typedef enum logic [1:0] {
    RST_POR,      // power-on reset: every flip-flop held in reset
    RST_RUN,      // normal execution
    RST_CLEAR     // ff.clr: microarchitectural flip-flops held in reset
  } rst_state_e;

endpackage
