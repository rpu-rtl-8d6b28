// mod_mul: pipelined 128-bit modular multiplier, r = (a * b) mod q.
//
// The full 256-bit product is formed in the first stage and reduced by a
// generic modulo in the second; further stages only delay the result, so the
// total latency is LAT cycles (LAT >= 2) and a new operand pair is accepted
// every cycle (initiation interval 1). The paper treats the multiplier as an
// exchangeable component whose latency and initiation interval it sweeps; it
// does not give its insides, so this generic reduction is this design's
// choice. The operands are expected to be reduced (a, b < q).
module mod_mul #(
  parameter int unsigned W   = 128,
  parameter int unsigned LAT = 4
) (
  input  logic         clk,
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic [W-1:0] q,
  output logic [W-1:0] r
);
  logic [2*W-1:0] prod_q;
  logic [W-1:0]   q_q;
  logic [W-1:0]   dly [LAT-1];

  always_ff @(posedge clk) begin
    prod_q <= {{W{1'b0}}, a} * {{W{1'b0}}, b};
    q_q    <= q;
    dly[0] <= (q_q == '0) ? '0 : W'(prod_q % {{W{1'b0}}, q_q});
    for (int i = 1; i < LAT - 1; i++) dly[i] <= dly[i-1];
  end

  assign r = dly[LAT-2];

  initial assert (LAT >= 2) else $error("mod_mul: LAT must be at least 2");
endmodule
