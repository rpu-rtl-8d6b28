// ldst_unit: the load/store pipeline, executing B512 load/store instructions.
//
// VLOAD / VSTORE move one 512-element register between the VRF and the VDM,
// one element slot (NUM_HPLES elements, one per lane) at a time. Element e
// has VDM word address ARF[RM] + ADDRESS + offset(e, MODE, VALUE), where the
// offset is e (contiguous), e*2^V (strided), blocks of 2^V taken with 2^V
// skipped (strided-skip) or e>>V (repeated: each word used 2^V times, V=9
// broadcasts one word). Addresses wrap at the VDM size.
//   load : all lanes request their words through the VBAR until every lane
//          is served (bank collisions take extra cycles), then the slot is
//          written into VD through the VBAR's VRF write port.
//   store: the slot of VD is read through the VBAR's VRF read port, then
//          written to the VDM through the VBAR until all lanes are served.
// SLOAD / MLOAD read SDM[ADDRESS] and write it to SRF[RT] / MRF[RT].
// One instruction runs at a time; it leaves the queue when it starts and its
// registers are released when it ends. The mode and value encodings and the
// sequencing are this design's choices; the paper names the modes only.
module ldst_unit
  import rpu_pkg::*;
#(
  parameter int unsigned NUM_HPLES = 128,
  parameter int unsigned VDM_WORDS = 262144,
  parameter int unsigned SDM_AW    = 11
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              q_valid,
  input  instr_t            q_instr,
  output logic              q_pop,
  // VRF ports P_LW and P_STR
  output vrf_req_t          req [2],
  input  logic              grant [2],
  input  elem_t             vrf_rdata [NUM_HPLES],
  output elem_t             vrf_wdata [NUM_HPLES],
  // VBAR lane side
  output logic              vb_we,
  output logic              vb_req   [NUM_HPLES],
  output logic [ADDR_W-1:0] vb_addr  [NUM_HPLES],
  output elem_t             vb_wdata [NUM_HPLES],
  input  logic              vb_served[NUM_HPLES],
  input  logic              vb_rvalid[NUM_HPLES],
  input  elem_t             vb_rdata [NUM_HPLES],
  // scalar unit
  output reg_idx_t          arf_raddr,
  input  logic [ADDR_W-1:0] arf_rdata,
  output logic              sdm_re,
  output logic [SDM_AW-1:0] sdm_raddr,
  input  elem_t             sdm_rdata,
  output logic              srf_we,
  output logic              mrf_we,
  output reg_idx_t          sm_waddr,
  output elem_t             sm_wdata,
  // status
  output logic              rel_valid,
  output instr_t            rel_instr,
  output logic              idle,
  output logic              collision_stall
);
  localparam int unsigned L   = NUM_HPLES;
  localparam int unsigned EPL = VLEN / NUM_HPLES;
  localparam int unsigned SW  = (EPL > 1) ? $clog2(EPL) : 1;

  typedef enum logic [3:0] {
    S_IDLE, L_ACC, L_CAP, L_WR, S_RD, S_CAP, S_ACC, C_RD, C_WR
  } state_e;

  state_e        st;
  instr_t        ins;
  logic [SW-1:0] slot;
  logic          pend [L];
  logic          all_done;
  elem_t         buf_q [L];
  logic [ADDR_W-1:0] base;

  assign q_pop     = (st == S_IDLE) && q_valid;
  assign arf_raddr = ins.rm;
  assign base      = arf_rdata + ADDR_W'(ins.addr);

  always_comb begin
    for (int k = 0; k < L; k++) begin
      vb_req[k]   = pend[k] && (st == L_ACC || st == S_ACC);
      vb_addr[k]  = ADDR_W'((base + lsi_offset(10'(32'(slot) * L + k), addr_mode_e'(ins.vs[1:0]),
                            ins.vt[3:0])) % VDM_WORDS);
      vb_wdata[k] = buf_q[k];
      vrf_wdata[k] = buf_q[k];
    end
  end

  always_comb begin
    all_done = 1'b1;
    for (int k = 0; k < L; k++) if (pend[k] && !vb_served[k]) all_done = 1'b0;
  end
  assign vb_we = (st == S_ACC);

  always_comb begin
    collision_stall = 1'b0;
    if (st == L_ACC || st == S_ACC) collision_stall = !all_done;
  end

  always_comb begin
    req[0] = '{en: st == L_WR, we: 1'b1, rg: ins.vd, slot: 9'(slot)};
    req[1] = '{en: st == S_RD, we: 1'b0, rg: ins.vd, slot: 9'(slot)};
  end

  assign sdm_re    = (st == C_RD);
  assign sdm_raddr = SDM_AW'(ins.addr);
  assign srf_we    = (st == C_WR) && (ins.opcode == OP_SLOAD);
  assign mrf_we    = (st == C_WR) && (ins.opcode == OP_MLOAD);
  assign sm_waddr  = ins.vt;
  assign sm_wdata  = sdm_rdata;

  logic last_slot;
  assign last_slot = (slot == SW'(EPL - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; ins <= '0; slot <= '0;
      for (int k = 0; k < L; k++) pend[k] <= 1'b0;
    end else begin
      case (st)
        S_IDLE: if (q_valid) begin
          ins  <= q_instr;
          slot <= '0;
          for (int k = 0; k < L; k++) pend[k] <= 1'b1;
          case (q_instr.opcode)
            OP_VLOAD:  st <= L_ACC;
            OP_VSTORE: st <= S_RD;
            default:   st <= C_RD;
          endcase
        end
        L_ACC: begin
          for (int k = 0; k < L; k++) if (vb_served[k]) pend[k] <= 1'b0;
          if (all_done) st <= L_CAP;
        end
        L_CAP: st <= L_WR;
        L_WR: if (grant[0]) begin
          if (last_slot) st <= S_IDLE;
          else begin
            slot <= slot + 1'b1; st <= L_ACC;
            for (int k = 0; k < L; k++) pend[k] <= 1'b1;
          end
        end
        S_RD: if (grant[1]) st <= S_CAP;
        S_CAP: st <= S_ACC;
        S_ACC: begin
          for (int k = 0; k < L; k++) if (vb_served[k]) pend[k] <= 1'b0;
          if (all_done) begin
            if (last_slot) st <= S_IDLE;
            else begin
              slot <= slot + 1'b1; st <= S_RD;
              for (int k = 0; k < L; k++) pend[k] <= 1'b1;
            end
          end
        end
        C_RD: st <= C_WR;
        C_WR: st <= S_IDLE;
        default: st <= S_IDLE;
      endcase
    end
  end

  // lane data buffer: load data from the VDM, store data from the VRF
  always_ff @(posedge clk) begin
    for (int k = 0; k < L; k++) begin
      if (vb_rvalid[k])     buf_q[k] <= vb_rdata[k];
      else if (st == S_CAP) buf_q[k] <= vrf_rdata[k];
    end
  end

  assign rel_valid = ((st == L_WR) && grant[0] && last_slot)
                  || ((st == S_ACC) && all_done && last_slot) || (st == C_WR);
  assign rel_instr = ins;
  assign idle      = (st == S_IDLE) && !q_valid;
endmodule
