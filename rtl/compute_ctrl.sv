// compute_ctrl: control of the compute pipeline (compute queue -> HPLEs).
//
// A compute instruction is executed as EPL = 512/NUM_HPLES beats, one element
// slot per beat, in all lanes at once. For each beat the controller requests
// the VRF reads it needs (VS; VT unless vector-scalar; VT1 for a butterfly).
// Reads that lose a single-port memory to another access are retried in the
// next cycle while granted ones are latched in the lanes (cap). When all are
// in hand the beat is fired two cycles later, together with the scalar (SRF)
// and modulus (MRF) values read at that point, and its results are written
// MUL_LAT+1 cycles after firing on the compute write ports, which have the
// highest VRF priority. A butterfly whose VD and VD1 share a memory writes
// VD1 one cycle late and leaves a one-cycle gap behind it. When the last beat
// of an instruction is written its registers are released to the busyboard.
// Beat sequencing is this design's own; the paper describes the
// read-compute-write steps of a compute instruction but no timing.
module compute_ctrl
  import rpu_pkg::*;
#(
  parameter int unsigned NUM_HPLES = 128,
  parameter int unsigned MUL_LAT   = 4
) (
  input  logic     clk,
  input  logic     rst_n,
  // compute queue
  input  logic     q_valid,
  input  instr_t   q_instr,
  output logic     q_pop,
  // VRF ports P_CW0, P_CW1, P_CR0..P_CR2
  output vrf_req_t req [5],
  input  logic     grant [5],
  // scalar unit read ports
  output reg_idx_t srf_raddr,
  input  elem_t    srf_rdata,
  output reg_idx_t mrf_raddr,
  input  elem_t    mrf_rdata,
  // lane control
  output logic [2:0] cap,
  output logic     fire,
  output law_op_e  op,
  output logic     use_scalar,
  output elem_t    scalar,
  output elem_t    modulus,
  output logic     w1_from_hold,
  // busyboard release
  output logic     rel_valid,
  output instr_t   rel_instr,
  output logic     idle,
  output logic     conflict_stall
);
  localparam int unsigned EPL  = VLEN / NUM_HPLES;
  localparam int unsigned SW   = (EPL > 1) ? $clog2(EPL) : 1;
  localparam int unsigned WLAT = MUL_LAT + 1;  // fire -> result write

  typedef struct packed {
    logic    valid;
    logic    last;
    logic    same;     // butterfly with VD and VD1 in the same memory
    logic    bfly;
    law_op_e op;
    logic    use_s;
    elem_t   scalar;
    elem_t   modulus;
    logic [SW-1:0] slot;
    instr_t  instr;
  } beat_t;

  logic [SW-1:0] slot;
  logic [2:0]    got, need, g, gm;
  logic          gap, complete, bfly_c, same_c;
  beat_t         nb, f1, f2;
  beat_t         ws [WLAT];
  logic          w1_pend;
  beat_t         w1_beat;

  assign bfly_c = is_bfly(q_instr);
  assign same_c = bfly_c && (vrf_bank(q_instr.vd) == vrf_bank(q_instr.vd1_f[5:0]));
  assign need   = {bfly_c, !is_vs_op(q_instr), 1'b1};

  assign srf_raddr = q_instr.vt;
  assign mrf_raddr = q_instr.rm;

  // read requests for the current beat
  always_comb begin
    req[2] = '{en: q_valid && !gap && need[0] && !got[0], we: 1'b0, rg: q_instr.vs,  slot: 9'(slot)};
    req[3] = '{en: q_valid && !gap && need[1] && !got[1], we: 1'b0, rg: q_instr.vt,  slot: 9'(slot)};
    req[4] = '{en: q_valid && !gap && need[2] && !got[2], we: 1'b0, rg: q_instr.vt1, slot: 9'(slot)};
  end

  assign g        = {grant[4] && req[4].en, grant[3] && req[3].en, grant[2] && req[2].en};
  assign gm       = got | g;
  assign complete = q_valid && !gap && ((gm & need) == need);
  assign q_pop    = complete && (slot == SW'(EPL - 1));
  assign conflict_stall = q_valid && !gap && !complete;

  always_comb begin
    nb         = '0;
    nb.valid   = complete;
    nb.last    = (slot == SW'(EPL - 1));
    nb.same    = same_c;
    nb.bfly    = bfly_c;
    nb.op      = law_op(q_instr);
    nb.use_s   = is_vs_op(q_instr);
    nb.scalar  = srf_rdata;
    nb.modulus = mrf_rdata;
    nb.slot    = slot;
    nb.instr   = q_instr;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      slot <= '0; got <= '0; gap <= 1'b0; cap <= '0;
      f1 <= '0; f2 <= '0; w1_pend <= 1'b0; w1_beat <= '0;
      for (int i = 0; i < WLAT; i++) ws[i] <= '0;
    end else begin
      cap <= g;
      gap <= complete && same_c;
      if (complete) begin
        got  <= '0;
        slot <= (slot == SW'(EPL - 1)) ? '0 : slot + 1'b1;
      end else begin
        got <= gm & need;
      end
      f1 <= nb;
      f2 <= f1;
      ws[0] <= f2;
      for (int i = 1; i < WLAT; i++) ws[i] <= ws[i-1];
      w1_pend <= ws[WLAT-1].valid && ws[WLAT-1].same;
      w1_beat <= ws[WLAT-1];
    end
  end

  assign fire       = f2.valid;
  assign op         = f2.op;
  assign use_scalar = f2.use_s;
  assign scalar     = f2.scalar;
  assign modulus    = f2.modulus;

  // result writes
  beat_t wb;
  assign wb = ws[WLAT-1];
  always_comb begin
    req[0] = '{en: wb.valid, we: 1'b1, rg: wb.instr.vd, slot: 9'(wb.slot)};
    if (w1_pend)
      req[1] = '{en: 1'b1, we: 1'b1, rg: w1_beat.instr.vd1_f[5:0], slot: 9'(w1_beat.slot)};
    else
      req[1] = '{en: wb.valid && wb.bfly && !wb.same, we: 1'b1,
                 rg: wb.instr.vd1_f[5:0], slot: 9'(wb.slot)};
  end
  assign w1_from_hold = w1_pend;

  assign rel_valid = (wb.valid && wb.last && !wb.same) || (w1_pend && w1_beat.last);
  assign rel_instr = w1_pend ? w1_beat.instr : wb.instr;

  always_comb begin
    idle = !q_valid && !f1.valid && !f2.valid && !w1_pend;
    for (int i = 0; i < WLAT; i++) if (ws[i].valid) idle = 1'b0;
  end

  // compute writes have top priority and must never be refused
  a_w0_granted: assert property (@(posedge clk) disable iff (!rst_n) req[0].en |-> grant[0]);
  a_w1_granted: assert property (@(posedge clk) disable iff (!rst_n) req[1].en |-> grant[1]);
endmodule
