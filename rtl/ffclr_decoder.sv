// ffclr_decoder: decode-stage extension that recognises ff.clr.
//
// The core's instruction decoder is extended by this unit. It compares the
// instruction word in the decode stage with the fixed ff.clr encoding and
// tags the instruction, so that the pipeline can carry the tag to retirement,
// where the reset controller acts on it. ff.clr destroys all pipeline state
// and moves execution to the reset vector, so it is only legal in machine
// mode; in a lower privilege level it is flagged as an illegal instruction
// and must trap instead of being tagged.
//
// Interface: id_valid_i/id_insn_i/priv_i describe the instruction in decode;
// is_ffclr_o marks a legal ff.clr, illegal_o an ff.clr that must trap.
// Timing: purely combinational, zero cycles, so it fits beside the existing
// decode logic in the same stage.
//
// From the design description: a decoder extension exists and ff.clr is a
// new instruction. This implementation's own choices: the encoding (see
// ffclr_pkg) and the machine-mode restriction.
module ffclr_decoder
  import ffclr_pkg::*;
(
  input  logic        id_valid_i,  // an instruction is in the decode stage
  input  logic [31:0] id_insn_i,   // its 32-bit word
  input  priv_e       priv_i,      // current privilege level
  output logic        is_ffclr_o,  // legal ff.clr: tag it for retirement
  output logic        illegal_o    // ff.clr below machine mode: trap
);

  logic match;

  always_comb begin
    match      = id_valid_i && (id_insn_i == FFCLR_INSN);
    is_ffclr_o = match && (priv_i == PRIV_M);
    illegal_o  = match && (priv_i != PRIV_M);
  end

endmodule
