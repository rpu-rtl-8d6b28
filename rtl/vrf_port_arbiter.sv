// vrf_port_arbiter: grants VRF memory accesses for one cycle.
//
// All lanes access the same register and slot on a given port, so the memory
// conflicts are the same in every VRF slice and are resolved once, here.
// Requests are taken in port order (compute writes, shuffle write, load write,
// compute reads, shuffle reads, store read): a request is granted when no
// earlier granted request uses the same single-port memory. Losers retry in a
// later cycle. The fixed priority order is this design's choice; the paper
// leaves memory conflicts to the compiler's register placement.
module vrf_port_arbiter
  import rpu_pkg::*;
(
  input  vrf_req_t req   [NPORTS],
  output logic     grant [NPORTS]
);
  always_comb begin
    logic [VRF_BANKS-1:0] taken;
    taken = '0;
    for (int p = 0; p < NPORTS; p++) begin
      grant[p] = 1'b0;
      if (req[p].en && !taken[vrf_bank(req[p].rg)]) begin
        grant[p] = 1'b1;
        taken[vrf_bank(req[p].rg)] = 1'b1;
      end
    end
  end
endmodule
