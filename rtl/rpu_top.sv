// rpu_top: the Ring Processing Unit, a decoupled vector processor for the
// B512 ISA (512-element vectors of 128-bit residues, native modular math).
//
// Front-end: instruction memory, in-order fetch/decode, busyboard, and three
// instruction queues. Back-end: a compute pipeline (compute_ctrl driving
// NUM_HPLES lanes, each an HPLE = VRF slice + LAW engine), a shuffle pipeline
// (shuffle_unit, the SBAR) and a load/store pipeline (ldst_unit driving the
// VBAR into the banked VDM), plus the scalar unit (SDM, SRF, MRF, ARF). The
// three pipelines run concurrently on independent instructions; they meet
// only at the VRF's single-port memories, where vrf_port_arbiter resolves
// conflicts each cycle. The defaults are the paper's main configuration:
// 128 HPLEs, 128 VDM banks, 4 MiB VDM, 512 KB instruction memory, 32 KB SDM.
//
// Host interface (the controlling RISC-V core and the HBM side, which are not
// part of this design): write ports for the instruction memory, SDM and ARF,
// a word port into the VDM (one cycle read latency; meant for use while busy
// is low), and start/start_pc/busy/done for kernel launch. Queue depth and
// the multiplier latency are this design's choices.
module rpu_top
  import rpu_pkg::*;
#(
  parameter int unsigned NUM_HPLES = 128,
  parameter int unsigned NUM_BANKS = 128,
  parameter int unsigned VDM_WORDS = 262144,
  parameter int unsigned IM_DEPTH  = 65536,
  parameter int unsigned SDM_DEPTH = 2048,
  parameter int unsigned QDEPTH    = 8,
  parameter int unsigned MUL_LAT   = 4,
  parameter int unsigned IM_AW     = (IM_DEPTH > 1) ? $clog2(IM_DEPTH) : 1,
  parameter int unsigned SDM_AW    = (SDM_DEPTH > 1) ? $clog2(SDM_DEPTH) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // kernel launch
  input  logic              start,
  input  logic [IM_AW-1:0]  start_pc,
  output logic              busy,
  output logic              done,
  // host loading
  input  logic              im_we,
  input  logic [IM_AW-1:0]  im_waddr,
  input  logic [63:0]       im_wdata,
  input  logic              sdm_we,
  input  logic [SDM_AW-1:0] sdm_waddr,
  input  elem_t             sdm_wdata,
  input  logic              arf_we,
  input  reg_idx_t          arf_waddr,
  input  logic [ADDR_W-1:0] arf_wdata,
  input  logic              vdm_en,
  input  logic              vdm_we,
  input  logic [ADDR_W-1:0] vdm_addr,
  input  elem_t             vdm_wdata,
  output elem_t             vdm_rdata,
  // stall events, one bit each per cycle: [0] busyboard hazard, [1] queue
  // full, [2] compute VRF conflict, [3] shuffle VRF conflict, [4] VDM bank
  // collision
  output logic [4:0]        stall_events
);
  localparam int unsigned L          = NUM_HPLES;
  localparam int unsigned BANK_DEPTH = VDM_WORDS / NUM_BANKS;
  localparam int unsigned ROW_W      = (BANK_DEPTH > 1) ? $clog2(BANK_DEPTH) : 1;

  // ---------------- front-end ----------------
  logic        im_re;
  logic [IM_AW-1:0] im_raddr;
  logic [63:0] im_rdata;
  logic        push_ls, push_cmp, push_shf, full_ls, full_cmp, full_shf;
  instr_t      push_instr;
  logic        rel_ls, rel_cmp, rel_shf;
  instr_t      rel_ls_instr, rel_cmp_instr, rel_shf_instr;
  logic        idle_ls, idle_cmp, idle_shf;
  logic        hazard_stall, queue_stall;

  instr_mem #(.DEPTH(IM_DEPTH)) u_im (
    .clk(clk), .we(im_we), .waddr(im_waddr), .wdata(im_wdata),
    .re(im_re), .raddr(im_raddr), .rdata(im_rdata)
  );

  frontend #(.IM_AW(IM_AW)) u_fe (
    .clk(clk), .rst_n(rst_n), .start(start), .start_pc(start_pc), .busy(busy), .done(done),
    .im_re(im_re), .im_raddr(im_raddr), .im_rdata(im_rdata),
    .push_ls(push_ls), .push_cmp(push_cmp), .push_shf(push_shf), .push_instr(push_instr),
    .full_ls(full_ls), .full_cmp(full_cmp), .full_shf(full_shf),
    .rel_ls(rel_ls), .rel_cmp(rel_cmp), .rel_shf(rel_shf),
    .rel_ls_instr(rel_ls_instr), .rel_cmp_instr(rel_cmp_instr), .rel_shf_instr(rel_shf_instr),
    .backend_idle(idle_ls && idle_cmp && idle_shf),
    .hazard_stall(hazard_stall), .queue_stall(queue_stall)
  );

  logic   v_ls, v_cmp, v_shf, pop_ls, pop_cmp, pop_shf;
  instr_t h_ls, h_cmp, h_shf;

  inst_queue #(.DEPTH(QDEPTH)) u_q_ls (
    .clk(clk), .rst_n(rst_n), .push(push_ls), .din(push_instr), .full(full_ls),
    .pop(pop_ls), .dout(h_ls), .valid(v_ls));
  inst_queue #(.DEPTH(QDEPTH)) u_q_cmp (
    .clk(clk), .rst_n(rst_n), .push(push_cmp), .din(push_instr), .full(full_cmp),
    .pop(pop_cmp), .dout(h_cmp), .valid(v_cmp));
  inst_queue #(.DEPTH(QDEPTH)) u_q_shf (
    .clk(clk), .rst_n(rst_n), .push(push_shf), .din(push_instr), .full(full_shf),
    .pop(pop_shf), .dout(h_shf), .valid(v_shf));

  // ---------------- scalar unit ----------------
  logic              sdm_re, srf_we, mrf_we;
  logic [SDM_AW-1:0] sdm_raddr;
  elem_t             sdm_rdata, sm_wdata, srf_rdata, mrf_rdata;
  reg_idx_t          sm_waddr, arf_raddr, srf_raddr, mrf_raddr;
  logic [ADDR_W-1:0] arf_rdata;

  scalar_unit #(.SDM_DEPTH(SDM_DEPTH)) u_scalar (
    .clk(clk),
    .host_sdm_we(sdm_we), .host_sdm_addr(sdm_waddr), .host_sdm_wdata(sdm_wdata),
    .host_arf_we(arf_we), .host_arf_addr(arf_waddr), .host_arf_wdata(arf_wdata),
    .sdm_re(sdm_re), .sdm_raddr(sdm_raddr), .sdm_rdata(sdm_rdata),
    .srf_we(srf_we), .mrf_we(mrf_we), .sm_waddr(sm_waddr), .sm_wdata(sm_wdata),
    .arf_raddr(arf_raddr), .arf_rdata(arf_rdata),
    .srf_raddr(srf_raddr), .srf_rdata(srf_rdata),
    .mrf_raddr(mrf_raddr), .mrf_rdata(mrf_rdata)
  );

  // ---------------- VRF port arbitration ----------------
  vrf_req_t req [NPORTS];
  logic     grant [NPORTS];
  vrf_req_t lane_req [NPORTS];
  vrf_req_t c_req [5];
  logic     c_grant [5];
  vrf_req_t s_req [3];
  logic     s_grant [3];
  vrf_req_t l_req [2];
  logic     l_grant [2];

  always_comb begin
    req[P_CW0] = c_req[0]; req[P_CW1] = c_req[1];
    req[P_CR0] = c_req[2]; req[P_CR1] = c_req[3]; req[P_CR2] = c_req[4];
    req[P_SW]  = s_req[0]; req[P_SR0] = s_req[1]; req[P_SR1] = s_req[2];
    req[P_LW]  = l_req[0]; req[P_STR] = l_req[1];
  end

  always_comb begin
    c_grant[0] = grant[P_CW0]; c_grant[1] = grant[P_CW1];
    c_grant[2] = grant[P_CR0]; c_grant[3] = grant[P_CR1]; c_grant[4] = grant[P_CR2];
    s_grant[0] = grant[P_SW];  s_grant[1] = grant[P_SR0]; s_grant[2] = grant[P_SR1];
    l_grant[0] = grant[P_LW];  l_grant[1] = grant[P_STR];
  end

  always_comb begin
    for (int p = 0; p < NPORTS; p++) begin
      lane_req[p]    = req[p];
      lane_req[p].en = req[p].en && grant[p];
    end
  end

  vrf_port_arbiter u_arb (.req(req), .grant(grant));

  // ---------------- compute pipeline + HPLE lanes ----------------
  logic [2:0] cap;
  logic       fire, use_scalar, w1_from_hold;
  law_op_e    op;
  elem_t      scalar, modulus;
  logic       cmp_conflict, shf_conflict, ls_collision;

  compute_ctrl #(.NUM_HPLES(L), .MUL_LAT(MUL_LAT)) u_cmp (
    .clk(clk), .rst_n(rst_n), .q_valid(v_cmp), .q_instr(h_cmp), .q_pop(pop_cmp),
    .req(c_req), .grant(c_grant),
    .srf_raddr(srf_raddr), .srf_rdata(srf_rdata), .mrf_raddr(mrf_raddr), .mrf_rdata(mrf_rdata),
    .cap(cap), .fire(fire), .op(op), .use_scalar(use_scalar), .scalar(scalar),
    .modulus(modulus), .w1_from_hold(w1_from_hold),
    .rel_valid(rel_cmp), .rel_instr(rel_cmp_instr), .idle(idle_cmp),
    .conflict_stall(cmp_conflict)
  );

  elem_t sbar_rd0 [L];
  elem_t sbar_rd1 [L];
  elem_t sbar_wd  [L];
  elem_t st_rd    [L];
  elem_t ld_wd    [L];
  logic  lane_res_valid [L];

  for (genvar k = 0; k < L; k++) begin : g_lane
    hple #(.NUM_HPLES(L), .MUL_LAT(MUL_LAT)) u_hple (
      .clk(clk), .rst_n(rst_n), .req(lane_req),
      .sbar_wdata(sbar_wd[k]), .vbar_wdata(ld_wd[k]),
      .sbar_rdata0(sbar_rd0[k]), .sbar_rdata1(sbar_rd1[k]), .vbar_rdata(st_rd[k]),
      .cap(cap), .fire(fire), .op(op), .use_scalar(use_scalar), .scalar(scalar),
      .modulus(modulus), .w1_from_hold(w1_from_hold), .res_valid(lane_res_valid[k])
    );
  end

  // ---------------- shuffle pipeline (SBAR) ----------------
  shuffle_unit #(.NUM_HPLES(L)) u_shf (
    .clk(clk), .rst_n(rst_n), .q_valid(v_shf), .q_instr(h_shf), .q_pop(pop_shf),
    .req(s_req), .grant(s_grant), .rdata0(sbar_rd0), .rdata1(sbar_rd1), .wdata(sbar_wd),
    .rel_valid(rel_shf), .rel_instr(rel_shf_instr), .idle(idle_shf),
    .conflict_stall(shf_conflict)
  );

  // ---------------- load/store pipeline, VBAR, VDM ----------------
  logic              vb_we;
  logic              vb_req    [L];
  logic [ADDR_W-1:0] vb_addr   [L];
  elem_t             vb_wdata  [L];
  logic              vb_served [L];
  logic              vb_rvalid [L];
  elem_t             vb_rdata  [L];
  logic              bank_en   [NUM_BANKS];
  logic              bank_we   [NUM_BANKS];
  logic [ROW_W-1:0]  bank_row  [NUM_BANKS];
  elem_t             bank_wdata[NUM_BANKS];
  elem_t             bank_rdata[NUM_BANKS];

  ldst_unit #(.NUM_HPLES(L), .VDM_WORDS(VDM_WORDS), .SDM_AW(SDM_AW)) u_ls (
    .clk(clk), .rst_n(rst_n), .q_valid(v_ls), .q_instr(h_ls), .q_pop(pop_ls),
    .req(l_req), .grant(l_grant), .vrf_rdata(st_rd), .vrf_wdata(ld_wd),
    .vb_we(vb_we), .vb_req(vb_req), .vb_addr(vb_addr), .vb_wdata(vb_wdata),
    .vb_served(vb_served), .vb_rvalid(vb_rvalid), .vb_rdata(vb_rdata),
    .arf_raddr(arf_raddr), .arf_rdata(arf_rdata),
    .sdm_re(sdm_re), .sdm_raddr(sdm_raddr), .sdm_rdata(sdm_rdata),
    .srf_we(srf_we), .mrf_we(mrf_we), .sm_waddr(sm_waddr), .sm_wdata(sm_wdata),
    .rel_valid(rel_ls), .rel_instr(rel_ls_instr), .idle(idle_ls),
    .collision_stall(ls_collision)
  );

  vbar #(.NUM_HPLES(L), .NUM_BANKS(NUM_BANKS), .ROW_W(ROW_W)) u_vbar (
    .clk(clk), .rst_n(rst_n), .we(vb_we), .lane_req(vb_req), .lane_addr(vb_addr),
    .lane_wdata(vb_wdata), .served(vb_served), .lane_rvalid(vb_rvalid), .lane_rdata(vb_rdata),
    .bank_en(bank_en), .bank_we(bank_we), .bank_row(bank_row),
    .bank_wdata(bank_wdata), .bank_rdata(bank_rdata)
  );

  vdm #(.NUM_BANKS(NUM_BANKS), .BANK_DEPTH(BANK_DEPTH), .ROW_W(ROW_W)) u_vdm (
    .clk(clk), .bank_en(bank_en), .bank_we(bank_we), .bank_row(bank_row),
    .bank_wdata(bank_wdata), .bank_rdata(bank_rdata),
    .host_en(vdm_en), .host_we(vdm_we), .host_addr(vdm_addr),
    .host_wdata(vdm_wdata), .host_rdata(vdm_rdata)
  );

  assign stall_events = {ls_collision, shf_conflict, cmp_conflict, queue_stall, hazard_stall};

  // the compute results of all lanes are in lockstep
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
                               lane_res_valid[0] == lane_res_valid[L-1]);
endmodule
