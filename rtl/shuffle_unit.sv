// shuffle_unit: the shuffle pipeline and Shuffle Crossbar (SBAR).
//
// Executes the four B512 shuffle instructions on whole registers:
//   UNPKLO: VD[2i] = VS[i],       VD[2i+1] = VT[i]        (i < 256)
//   UNPKHI: VD[2i] = VS[256+i],   VD[2i+1] = VT[256+i]
//   PKLO  : VD[i]  = VS[2i],      VD[256+i] = VT[2i]
//   PKHI  : VD[i]  = VS[2i+1],    VD[256+i] = VT[2i+1]
// The order inside the interleave (VS element first) is this design's reading
// of the ISA text. Using its two VRF read ports the unit first gathers all
// EPL slots of VS and VT from every lane, then drives the fixed permutation
// for the selected mode across lanes and writes VD one slot per cycle through
// its single write port. A read or write that loses its VRF memory waits and
// retries. Shuffles run one at a time; the instruction leaves the shuffle
// queue when it starts and its registers are released after its last write.
// Gathering the whole vector before writing is this design's choice: the paper
// says only that the SBAR supports all four modes with 2 reads and 1 write.
module shuffle_unit
  import rpu_pkg::*;
#(
  parameter int unsigned NUM_HPLES = 128
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     q_valid,
  input  instr_t   q_instr,
  output logic     q_pop,
  // VRF ports P_SW, P_SR0, P_SR1
  output vrf_req_t req [3],
  input  logic     grant [3],
  input  elem_t    rdata0 [NUM_HPLES],
  input  elem_t    rdata1 [NUM_HPLES],
  output elem_t    wdata  [NUM_HPLES],
  output logic     rel_valid,
  output instr_t   rel_instr,
  output logic     idle,
  output logic     conflict_stall
);
  localparam int unsigned L   = NUM_HPLES;
  localparam int unsigned EPL = VLEN / NUM_HPLES;
  localparam int unsigned SW  = (EPL > 1) ? $clog2(EPL) : 1;

  typedef enum logic [1:0] {S_IDLE, S_READ, S_DRAIN, S_WRITE} state_e;
  state_e        st;
  instr_t        ins;
  logic [SW-1:0] slot, cap_slot;
  logic [1:0]    got, g, cap_en;
  elem_t         vs_buf [VLEN];
  elem_t         vt_buf [VLEN];
  elem_t         perm   [VLEN];

  assign q_pop = (st == S_IDLE) && q_valid;

  always_comb begin
    req[0] = '{en: st == S_WRITE, we: 1'b1, rg: ins.vd, slot: 9'(slot)};
    req[1] = '{en: st == S_READ && !got[0], we: 1'b0, rg: ins.vs, slot: 9'(slot)};
    req[2] = '{en: st == S_READ && !got[1], we: 1'b0, rg: ins.vt, slot: 9'(slot)};
  end
  assign g = {grant[2] && req[2].en, grant[1] && req[1].en};
  assign conflict_stall = (req[0].en && !grant[0]) || (req[1].en && !grant[1])
                       || (req[2].en && !grant[2]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; slot <= '0; got <= '0; cap_en <= '0; cap_slot <= '0; ins <= '0;
    end else begin
      cap_en   <= g;
      cap_slot <= slot;
      case (st)
        S_IDLE: if (q_valid) begin
          ins <= q_instr; st <= S_READ; slot <= '0; got <= '0;
        end
        S_READ: begin
          if ((got | g) == 2'b11) begin
            got <= '0;
            if (slot == SW'(EPL - 1)) begin slot <= '0; st <= S_DRAIN; end
            else slot <= slot + 1'b1;
          end else got <= got | g;
        end
        S_DRAIN: st <= S_WRITE;     // last read data is latched this cycle
        S_WRITE: if (grant[0]) begin
          if (slot == SW'(EPL - 1)) begin slot <= '0; st <= S_IDLE; end
          else slot <= slot + 1'b1;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  // gather buffers
  always_ff @(posedge clk) begin
    for (int k = 0; k < L; k++) begin
      if (cap_en[0]) vs_buf[32'(cap_slot) * L + k] <= rdata0[k];
      if (cap_en[1]) vt_buf[32'(cap_slot) * L + k] <= rdata1[k];
    end
  end

  // crossbar permutation
  always_comb begin
    for (int i = 0; i < VLEN / 2; i++) begin
      case (ins.opcode)
        OP_UNPKLO: begin perm[2*i] = vs_buf[i];            perm[2*i+1] = vt_buf[i]; end
        OP_UNPKHI: begin perm[2*i] = vs_buf[VLEN/2 + i];   perm[2*i+1] = vt_buf[VLEN/2 + i]; end
        OP_PKLO:   begin perm[i]   = vs_buf[2*i];          perm[VLEN/2 + i] = vt_buf[2*i]; end
        default:   begin perm[i]   = vs_buf[2*i+1];        perm[VLEN/2 + i] = vt_buf[2*i+1]; end
      endcase
    end
  end

  always_comb begin
    for (int k = 0; k < L; k++) wdata[k] = perm[32'(slot) * L + k];
  end

  assign rel_valid = (st == S_WRITE) && grant[0] && (slot == SW'(EPL - 1));
  assign rel_instr = ins;
  assign idle      = (st == S_IDLE) && !q_valid;
endmodule
