// hple: High-Performance LAW Engine, one vector lane of the RPU.
//
// A lane pairs a VRF slice with a LAW engine. Each compute beat reads up to
// three operands (VS, VT, VT1) of one element slot from the slice, computes,
// and writes one or two results (VD, VD1) back. All lanes run in lockstep
// under the compute controller: cap[i] latches the operand read on compute
// port i in the previous cycle, fire starts the LAW engine on the latched
// operands, and the results appear MUL_LAT+1 cycles later on the compute write
// ports. The VD1 result of a butterfly whose VD and VD1 share a VRF memory is
// written one cycle later from a hold register (w1_from_hold). Shuffle and
// vector-crossbar ports pass straight through to the slice.
module hple
  import rpu_pkg::*;
#(
  parameter int unsigned NUM_HPLES = 128,
  parameter int unsigned MUL_LAT   = 4
) (
  input  logic     clk,
  input  logic     rst_n,
  // VRF access (already arbitrated; identical in every lane)
  input  vrf_req_t req [NPORTS],
  // per-lane data of the shuffle and vector crossbar ports
  input  elem_t    sbar_wdata,
  input  elem_t    vbar_wdata,
  output elem_t    sbar_rdata0,
  output elem_t    sbar_rdata1,
  output elem_t    vbar_rdata,
  // compute control (common to all lanes)
  input  logic [2:0] cap,
  input  logic     fire,
  input  law_op_e  op,
  input  logic     use_scalar,
  input  elem_t    scalar,
  input  elem_t    modulus,
  input  logic     w1_from_hold,
  output logic     res_valid
);
  elem_t wdata [NPORTS];
  elem_t rdata [NPORTS];
  elem_t opnd [3];
  elem_t r0, r1, r1_hold;

  vrf_slice #(.NUM_HPLES(NUM_HPLES)) u_vrf (
    .clk(clk), .req(req), .wdata(wdata), .rdata(rdata)
  );

  always_ff @(posedge clk) begin
    for (int i = 0; i < 3; i++) if (cap[i]) opnd[i] <= rdata[P_CR0 + i];
  end

  law_engine #(.MUL_LAT(MUL_LAT)) u_law (
    .clk(clk), .rst_n(rst_n), .in_valid(fire), .op(op),
    .a(opnd[0]), .b(use_scalar ? scalar : opnd[1]), .c(opnd[2]), .q(modulus),
    .out_valid(res_valid), .r0(r0), .r1(r1)
  );

  always_ff @(posedge clk) if (res_valid) r1_hold <= r1;

  always_comb begin
    for (int p = 0; p < NPORTS; p++) wdata[p] = '0;
    wdata[P_CW0] = r0;
    wdata[P_CW1] = w1_from_hold ? r1_hold : r1;
    wdata[P_SW]  = sbar_wdata;
    wdata[P_LW]  = vbar_wdata;
  end

  assign sbar_rdata0 = rdata[P_SR0];
  assign sbar_rdata1 = rdata[P_SR1];
  assign vbar_rdata  = rdata[P_STR];
endmodule
