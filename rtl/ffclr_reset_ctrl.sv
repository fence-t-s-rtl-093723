// ffclr_reset_ctrl: the core's synchronous reset controller, extended for
// ff.clr.
//
// The controller produces two synchronous, active-low resets:
//   * csr_rst_no   resets the CSRs (and this controller's view of them). It
//                  follows only the power-on reset.
//   * uarch_rst_no resets every other on-core flip-flop: pipeline latches,
//                  rename table, queues, predictors' control state. It is
//                  asserted by the power-on reset and by a retiring ff.clr.
// Because the CSRs stay untouched, the reset-vector CSR mrvbr survives and
// the core continues from the address software put there.
//
// How it works: the asynchronous power-on reset por_rst_ni is synchronised by
// a chain of SYNC_STAGES flip-flops (asserted at once, released
// synchronously). A small state machine then moves POR -> RUN. In RUN, a
// retiring ff.clr (ffclr_retire_i for one cycle) moves it to CLEAR, where
// uarch_rst_no is held low for CLR_CYCLES cycles; it then returns to RUN.
// Each time the microarchitectural reset is released (after power-on and after
// every ff.clr) restart_o pulses for one cycle: the fetch unit then loads its
// PC from mrvbr.
//
// Timing: ffclr_retire_i sampled high at clock edge T holds uarch_rst_no low
// in the CLR_CYCLES clock cycles that follow edge T; restart_o is high in the
// next cycle, the first one with uarch_rst_no high again. After power-on,
// uarch_rst_no is released one cycle after csr_rst_no, with restart_o. A retire request while not in
// RUN is ignored (it cannot occur: the pipeline is held in reset then).
//
// From the design description: ff.clr clears all on-core flip-flops except
// the CSRs, through an extension of the synchronous reset controller, and
// execution resumes from mrvbr. This implementation's own choices: the two
// reset outputs, the synchroniser depth and the length of the clear pulse.
module ffclr_reset_ctrl
  import ffclr_pkg::*;
#(
  parameter int unsigned SYNC_STAGES = 2,  // power-on reset synchroniser depth (>= 2)
  parameter int unsigned CLR_CYCLES  = 4   // cycles uarch_rst_no is held by ff.clr
) (
  input  logic clk_i,
  input  logic por_rst_ni,      // asynchronous power-on reset, active low
  input  logic ffclr_retire_i,  // ff.clr retires this cycle
  output logic csr_rst_no,      // synchronous reset of the CSRs
  output logic uarch_rst_no,    // synchronous reset of all other flip-flops
  output logic restart_o,       // one-cycle pulse: fetch restarts from mrvbr
  output logic busy_o           // an ff.clr clear is in progress
);

  localparam int unsigned CW = (CLR_CYCLES > 1) ? $clog2(CLR_CYCLES) : 1;

  logic [SYNC_STAGES-1:0] sync_q;
  rst_state_e             state_q, state_d;
  logic [CW-1:0]          cnt_q, cnt_d;
  logic                   restart_q, restart_d;

  // Power-on reset synchroniser: asynchronous assertion, synchronous release.
  always_ff @(posedge clk_i or negedge por_rst_ni) begin
    if (!por_rst_ni) sync_q <= '0;
    else             sync_q <= {sync_q[SYNC_STAGES-2:0], 1'b1};
  end

  always_comb begin
    state_d   = state_q;
    cnt_d     = cnt_q;
    restart_d = 1'b0;
    unique case (state_q)
      RST_POR: begin
        state_d   = RST_RUN;
        restart_d = 1'b1;
      end
      RST_RUN: begin
        if (ffclr_retire_i) begin
          state_d = RST_CLEAR;
          cnt_d   = CW'(CLR_CYCLES - 1);
        end
      end
      RST_CLEAR: begin
        if (cnt_q == '0) begin
          state_d   = RST_RUN;
          restart_d = 1'b1;
        end else begin
          cnt_d = cnt_q - 1'b1;
        end
      end
      default: state_d = RST_POR;
    endcase
  end

  // The state machine is itself held by the synchronised power-on reset only.
  always_ff @(posedge clk_i) begin
    if (!sync_q[SYNC_STAGES-1]) begin
      state_q   <= RST_POR;
      cnt_q     <= '0;
      restart_q <= 1'b0;
    end else begin
      state_q   <= state_d;
      cnt_q     <= cnt_d;
      restart_q <= restart_d;
    end
  end

  assign csr_rst_no   = sync_q[SYNC_STAGES-1];
  assign uarch_rst_no = sync_q[SYNC_STAGES-1] && (state_q == RST_RUN);
  // Gated with the synchronised reset so that a power-on reset also silences
  // them at once, before the state machine sees a clock edge.
  assign restart_o    = sync_q[SYNC_STAGES-1] && restart_q;
  assign busy_o       = sync_q[SYNC_STAGES-1] && (state_q == RST_CLEAR);

  // ff.clr can only retire from a running pipeline.
  a_retire_in_run: assert property (@(posedge clk_i) disable iff (!csr_rst_no)
    ffclr_retire_i |-> (state_q == RST_RUN));

endmodule
