// mrvbr_csr: machine reset-vector base register.
//
// mrvbr holds the address at which the core starts executing when it leaves
// reset. Its power-on value is the reset base address strapped on the core's
// rvba_i input. Machine-mode software overwrites it with csrw; the temporal
// fence sequence loads the address of the instruction that follows ff.clr, so
// that, after ff.clr has cleared the pipeline, fetch resumes right there.
//
// Being a CSR, mrvbr is reset only by the CSR reset (csr_rst_ni, power-on),
// never by ff.clr. Its value is always visible on mrvbr_o for the fetch unit.
//
// Interface: a generic CSR write/read port (csr_we_i, csr_addr_i, csr_wdata_i,
// csr_rdata_o with csr_hit_o telling that the address selects this register).
// Timing: a write takes effect at the next clock edge; the read is
// combinational. Bit 0 reads as zero, since RISC-V instruction addresses with
// the compressed extension are 2-byte aligned.
//
// From the design description: mrvbr holds the restart address and is
// written before ff.clr. This implementation's own choices: the CSR port, the
// bit-0 alignment and the CSR number (see ffclr_pkg).
module mrvbr_csr
  import ffclr_pkg::*;
#(
  parameter int unsigned        W    = XLEN,
  parameter logic        [11:0] ADDR = CSR_MRVBR
) (
  input  logic         clk_i,
  input  logic         csr_rst_ni,   // CSR-domain synchronous reset, active low
  input  logic [W-1:0] rvba_i,       // power-on reset base address
  input  logic         csr_we_i,     // CSR write (machine mode, checked upstream)
  input  logic [11:0]  csr_addr_i,
  input  logic [W-1:0] csr_wdata_i,
  output logic         csr_hit_o,    // csr_addr_i selects mrvbr
  output logic [W-1:0] csr_rdata_o,
  output logic [W-1:0] mrvbr_o       // restart address for the fetch unit
);

  logic [W-1:0] mrvbr_q;

  always_ff @(posedge clk_i) begin
    if (!csr_rst_ni)                     mrvbr_q <= {rvba_i[W-1:1], 1'b0};
    else if (csr_we_i && csr_addr_i == ADDR) mrvbr_q <= {csr_wdata_i[W-1:1], 1'b0};
  end

  assign csr_hit_o   = (csr_addr_i == ADDR);
  assign csr_rdata_o = csr_hit_o ? mrvbr_q : '0;
  assign mrvbr_o     = mrvbr_q;

endmodule
