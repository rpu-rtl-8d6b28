// inst_queue: one of the three decoupled instruction queues (load/store,
// compute, shuffle) between the front-end and its pipeline.
//
// A first-in first-out buffer of DEPTH B512 instructions with a valid/ready
// style interface: push when not full, the head is visible whenever not
// empty, pop removes it. Simultaneous push and pop are allowed. The depth is
// not given in the paper; 8 is this design's choice.
module inst_queue
  import rpu_pkg::*;
#(
  parameter int unsigned DEPTH = 8
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   push,
  input  instr_t din,
  output logic   full,
  input  logic   pop,
  output instr_t dout,
  output logic   valid
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  instr_t      mem [DEPTH];
  logic [AW-1:0] rd, wr;
  logic [AW:0]   cnt;

  assign full  = (cnt == (AW+1)'(DEPTH));
  assign valid = (cnt != '0);
  assign dout  = mem[rd];

  always_ff @(posedge clk) if (push && !full) mem[wr] <= din;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd <= '0; wr <= '0; cnt <= '0;
    end else begin
      if (push && !full) wr <= (wr == AW'(DEPTH - 1)) ? '0 : wr + 1'b1;
      if (pop && valid)  rd <= (rd == AW'(DEPTH - 1)) ? '0 : rd + 1'b1;
      cnt <= cnt + (AW+1)'(push && !full) - (AW+1)'(pop && valid);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> !full);
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> valid);
endmodule
