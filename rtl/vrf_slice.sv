// vrf_slice: one lane's slice of the vector register file.
//
// The slice holds EPL = 512/NUM_HPLES elements of each of the 64 vector
// registers. As in the paper it is built from 16 single-port memories, each
// stacking four registers (4*EPL words); register r sits in memory r mod 16
// at word (r div 16)*EPL + slot (that mapping is this design's choice). Ten
// logical ports reach the memories: three reads and two writes for the LAW
// engine, two reads and one write for the shuffle crossbar, one read and one
// write for the vector crossbar. Each cycle a memory serves at most one port;
// the arbiter outside the lanes guarantees that, and an assertion checks it.
// Reads are synchronous: rdata[p] is valid the cycle after port p was enabled.
module vrf_slice
  import rpu_pkg::*;
#(
  parameter int unsigned NUM_HPLES = 128
) (
  input  logic     clk,
  input  vrf_req_t req   [NPORTS],
  input  elem_t    wdata [NPORTS],
  output elem_t    rdata [NPORTS]
);
  localparam int unsigned EPL   = VLEN / NUM_HPLES;
  localparam int unsigned DEPTH = REGS_PER_BANK * EPL;
  localparam int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [3:0]  port_bank [NPORTS];
  logic [AW-1:0] port_row [NPORTS];
  logic [3:0]  bank_q [NPORTS];

  always_comb begin
    for (int p = 0; p < NPORTS; p++) begin
      port_bank[p] = vrf_bank(req[p].rg);
      port_row[p]  = AW'(32'(req[p].rg[5:4]) * EPL + 32'(req[p].slot));
    end
  end

  for (genvar b = 0; b < VRF_BANKS; b++) begin : g_bank
    elem_t         mem [DEPTH];
    elem_t         rd_q;
    logic          en, we;
    logic [AW-1:0] row;
    elem_t         wd;

    // the (single) port that addresses this memory
    always_comb begin
      en = 1'b0; we = 1'b0; row = '0; wd = '0;
      for (int p = NPORTS - 1; p >= 0; p--) begin
        if (req[p].en && port_bank[p] == 4'(b)) begin
          en = 1'b1; we = req[p].we; row = port_row[p]; wd = wdata[p];
        end
      end
    end

    always_ff @(posedge clk) begin
      if (en && we)  mem[row] <= wd;
      if (en && !we) rd_q <= mem[row];
    end

    // single-port rule: no two enabled ports on this memory
    always_ff @(posedge clk) begin
      int n;
      n = 0;
      for (int p = 0; p < NPORTS; p++) if (req[p].en && port_bank[p] == 4'(b)) n++;
      assert (n <= 1) else $error("vrf_slice: %0d ports on memory %0d", n, b);
    end
  end

  elem_t bank_rd [VRF_BANKS];
  for (genvar b = 0; b < VRF_BANKS; b++) begin : g_rd
    assign bank_rd[b] = g_bank[b].rd_q;
  end

  always_ff @(posedge clk) begin
    for (int p = 0; p < NPORTS; p++) bank_q[p] <= port_bank[p];
  end

  always_comb begin
    for (int p = 0; p < NPORTS; p++) rdata[p] = bank_rd[bank_q[p]];
  end
endmodule
