// instr_mem: the RPU's local instruction memory.
//
// DEPTH 64-bit B512 instructions (65536 = the paper's 512 KB). The host
// writes a program through the write port; the front-end reads one
// instruction per cycle with one cycle of latency.
module instr_mem #(
  parameter int unsigned DEPTH = 65536,
  parameter int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [63:0]   wdata,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output logic [63:0]   rdata
);
  logic [63:0] mem [DEPTH];
  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
