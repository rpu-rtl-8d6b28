// scalar_unit: Scalar Data Memory (SDM) and the scalar, modulus and address
// register files (SRF, MRF, ARF).
//
// SDM: SDM_DEPTH 128-bit words (2048 words = the paper's 32 KB), written by
// the host, read synchronously (one cycle) by the load/store pipeline, whose
// SLOAD and MLOAD instructions copy an SDM word into the SRF or the MRF.
// SRF and MRF: 64 x 128 bits each, read combinationally by the compute
// controller, which forwards the values to all HPLEs. ARF: 64 addresses,
// written by the host and read combinationally by the load/store pipeline to
// form ARF[RM] + offset. Sizes follow the paper; the host write ports (the
// paper shows the ARF and SDM filled from outside the RPU) are this design's.
module scalar_unit
  import rpu_pkg::*;
#(
  parameter int unsigned SDM_DEPTH = 2048,
  parameter int unsigned SDM_AW    = (SDM_DEPTH > 1) ? $clog2(SDM_DEPTH) : 1
) (
  input  logic              clk,
  // host
  input  logic              host_sdm_we,
  input  logic [SDM_AW-1:0] host_sdm_addr,
  input  elem_t             host_sdm_wdata,
  input  logic              host_arf_we,
  input  reg_idx_t          host_arf_addr,
  input  logic [ADDR_W-1:0] host_arf_wdata,
  // load/store pipeline
  input  logic              sdm_re,
  input  logic [SDM_AW-1:0] sdm_raddr,
  output elem_t             sdm_rdata,
  input  logic              srf_we,
  input  logic              mrf_we,
  input  reg_idx_t          sm_waddr,
  input  elem_t             sm_wdata,
  input  reg_idx_t          arf_raddr,
  output logic [ADDR_W-1:0] arf_rdata,
  // compute pipeline
  input  reg_idx_t          srf_raddr,
  output elem_t             srf_rdata,
  input  reg_idx_t          mrf_raddr,
  output elem_t             mrf_rdata
);
  elem_t             sdm [SDM_DEPTH];
  elem_t             srf [NREGS];
  elem_t             mrf [NREGS];
  logic [ADDR_W-1:0] arf [NREGS];

  always_ff @(posedge clk) begin
    if (host_sdm_we) sdm[host_sdm_addr] <= host_sdm_wdata;
    if (sdm_re)      sdm_rdata <= sdm[sdm_raddr];
    if (srf_we)      srf[sm_waddr] <= sm_wdata;
    if (mrf_we)      mrf[sm_waddr] <= sm_wdata;
    if (host_arf_we) arf[host_arf_addr] <= host_arf_wdata;
  end

  assign srf_rdata = srf[srf_raddr];
  assign mrf_rdata = mrf[mrf_raddr];
  assign arf_rdata = arf[arf_raddr];
endmodule
