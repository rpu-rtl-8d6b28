// rpu_pkg: shared constants, instruction encoding and helper functions of the
// Ring Processing Unit, an implementation of the B512 vector ISA.
//
// B512 instructions are 64 bits wide. The field positions below follow the
// B512 encoding table: [63:55] VD1, [54:49] VT1, [48] BFLY, [47:44] opcode,
// [43:24] address, [23:18] VD, [17:12] VS / mode, [11:6] VT / value / RT,
// [5:0] RM. The numeric opcode values, the meaning of the four addressing
// modes beyond their names, and the NOP/HALT opcodes are this design's own
// choices: the ISA description names 17 instructions but gives no opcode
// numbers. Sixteen opcodes fill the 4-bit field; the 17th instruction, the
// butterfly, is any vector-vector compute opcode with the BFLY bit set.
//
// Vector element e of a register lives in lane (e mod NUM_HPLES) at slot
// (e div NUM_HPLES). Register r of a lane's VRF slice lives in single-port
// memory (r mod 16), so registers r, r+16, r+32 and r+48 share a memory.
package rpu_pkg;

  // ISA constants (B512)
  localparam int unsigned VLEN      = 512;  // elements per vector
  localparam int unsigned ELEM_W    = 128;  // element and modulus width
  localparam int unsigned NREGS     = 64;   // registers per register file
  localparam int unsigned REG_IDX_W = 6;
  localparam int unsigned INSTR_W   = 64;
  localparam int unsigned ADDR_W    = 32;   // ARF entry / VDM word address width
  localparam int unsigned VRF_BANKS = 16;   // single-port memories per VRF slice
  localparam int unsigned REGS_PER_BANK = NREGS / VRF_BANKS;  // 4

  typedef logic [ELEM_W-1:0]    elem_t;
  typedef logic [REG_IDX_W-1:0] reg_idx_t;
  typedef logic [NREGS-1:0]     reg_mask_t;

  typedef enum logic [3:0] {
    OP_NOP     = 4'h0,
    OP_HALT    = 4'h1,   // end of kernel: front-end drains and signals done
    OP_VLOAD   = 4'h2,   // VDM -> VRF
    OP_VSTORE  = 4'h3,   // VRF -> VDM
    OP_SLOAD   = 4'h4,   // SDM -> SRF
    OP_MLOAD   = 4'h5,   // SDM -> MRF
    OP_VADD_VV = 4'h6,
    OP_VSUB_VV = 4'h7,
    OP_VMUL_VV = 4'h8,
    OP_VADD_VS = 4'h9,
    OP_VSUB_VS = 4'hA,
    OP_VMUL_VS = 4'hB,
    OP_UNPKLO  = 4'hC,
    OP_UNPKHI  = 4'hD,
    OP_PKLO    = 4'hE,
    OP_PKHI    = 4'hF
  } opcode_e;

  // Vector load/store addressing modes (MODE field, 2 LSBs used)
  typedef enum logic [1:0] {
    AM_CONTIG   = 2'd0,  // addr = base + e
    AM_STRIDED  = 2'd1,  // addr = base + e * 2^VALUE
    AM_STRSKIP  = 2'd2,  // transfer 2^VALUE elements, skip 2^VALUE
    AM_REPEATED = 2'd3   // addr = base + (e >> VALUE): each word repeated 2^VALUE times
  } addr_mode_e;

  typedef enum logic [1:0] {
    CLS_CTRL    = 2'd0,
    CLS_LDST    = 2'd1,
    CLS_COMPUTE = 2'd2,
    CLS_SHUFFLE = 2'd3
  } instr_class_e;

  // Operation performed by a LAW engine
  typedef enum logic [1:0] {
    LOP_ADD  = 2'd0,
    LOP_SUB  = 2'd1,
    LOP_MUL  = 2'd2,
    LOP_BFLY = 2'd3
  } law_op_e;

  typedef struct packed {
    logic [8:0]  vd1_f;   // [63:55] (low 6 bits name VD1)
    logic [5:0]  vt1;     // [54:49]
    logic        bfly;    // [48]
    opcode_e     opcode;  // [47:44]
    logic [19:0] addr;    // [43:24]
    logic [5:0]  vd;      // [23:18]
    logic [5:0]  vs;      // [17:12] VS, or MODE for LSIs
    logic [5:0]  vt;      // [11:6]  VT, VALUE or RT
    logic [5:0]  rm;      // [5:0]   ARF index (LSI) or MRF index (CI)
  } instr_t;

  // VRF port numbering; a lower number wins a memory first
  localparam int unsigned NPORTS = 10;
  localparam int unsigned P_CW0 = 0;  // compute write VD
  localparam int unsigned P_CW1 = 1;  // compute write VD1 (butterfly)
  localparam int unsigned P_SW  = 2;  // shuffle write
  localparam int unsigned P_LW  = 3;  // load write
  localparam int unsigned P_CR0 = 4;  // compute read VS
  localparam int unsigned P_CR1 = 5;  // compute read VT
  localparam int unsigned P_CR2 = 6;  // compute read VT1
  localparam int unsigned P_SR0 = 7;  // shuffle read VS
  localparam int unsigned P_SR1 = 8;  // shuffle read VT
  localparam int unsigned P_STR = 9;  // store read

  // One VRF access, common to all lanes: register and element slot
  typedef struct packed {
    logic     en;
    logic     we;
    reg_idx_t rg;
    logic [8:0] slot;
  } vrf_req_t;

  function automatic instr_class_e instr_class(instr_t i);
    case (i.opcode)
      OP_NOP, OP_HALT:                     return CLS_CTRL;
      OP_VLOAD, OP_VSTORE, OP_SLOAD, OP_MLOAD: return CLS_LDST;
      OP_UNPKLO, OP_UNPKHI, OP_PKLO, OP_PKHI:  return CLS_SHUFFLE;
      default:                             return CLS_COMPUTE;
    endcase
  endfunction

  function automatic logic is_vs_op(instr_t i);
    return (i.opcode == OP_VADD_VS) || (i.opcode == OP_VSUB_VS) || (i.opcode == OP_VMUL_VS);
  endfunction

  function automatic logic is_bfly(instr_t i);
    return i.bfly && (instr_class(i) == CLS_COMPUTE) && !is_vs_op(i);
  endfunction

  function automatic law_op_e law_op(instr_t i);
    if (is_bfly(i)) return LOP_BFLY;
    case (i.opcode)
      OP_VADD_VV, OP_VADD_VS: return LOP_ADD;
      OP_VSUB_VV, OP_VSUB_VS: return LOP_SUB;
      default:                return LOP_MUL;
    endcase
  endfunction

  function automatic reg_mask_t bit_of(reg_idx_t r);
    reg_mask_t m;
    m = '0;
    m[r] = 1'b1;
    return m;
  endfunction

  // Vector registers an instruction reads or writes (the busyboard marks all)
  function automatic reg_mask_t vregs_used(instr_t i);
    case (instr_class(i))
      CLS_LDST:    return (i.opcode == OP_VLOAD || i.opcode == OP_VSTORE) ? bit_of(i.vd) : '0;
      CLS_SHUFFLE: return bit_of(i.vd) | bit_of(i.vs) | bit_of(i.vt);
      CLS_COMPUTE: begin
        if (is_vs_op(i)) return bit_of(i.vd) | bit_of(i.vs);
        if (is_bfly(i))  return bit_of(i.vd) | bit_of(i.vs) | bit_of(i.vt)
                                | bit_of(i.vt1) | bit_of(i.vd1_f[5:0]);
        return bit_of(i.vd) | bit_of(i.vs) | bit_of(i.vt);
      end
      default: return '0;
    endcase
  endfunction

  // Scalar registers: written by SLOAD, read by vector-scalar compute
  function automatic reg_mask_t sregs_used(instr_t i);
    if (i.opcode == OP_SLOAD) return bit_of(i.vt);
    if (instr_class(i) == CLS_COMPUTE && is_vs_op(i)) return bit_of(i.vt);
    return '0;
  endfunction

  // Modulus registers: written by MLOAD, read by every compute instruction
  function automatic reg_mask_t mregs_used(instr_t i);
    if (i.opcode == OP_MLOAD) return bit_of(i.vt);
    if (instr_class(i) == CLS_COMPUTE) return bit_of(i.rm);
    return '0;
  endfunction

  function automatic logic [3:0] vrf_bank(reg_idx_t r);
    return r[3:0];
  endfunction

  // Element offset (before base) of element e for a vector load/store
  function automatic logic [ADDR_W-1:0] lsi_offset(logic [9:0] e, addr_mode_e m, logic [3:0] v);
    logic [ADDR_W-1:0] ee, low;
    ee  = ADDR_W'(e);
    low = ee & ((ADDR_W'(1) << v) - 1);
    case (m)
      AM_CONTIG:   return ee;
      AM_STRIDED:  return ee << v;
      AM_STRSKIP:  return ((ee >> v) << (v + 1)) | low;
      default:     return ee >> v;
    endcase
  endfunction

  // Modular helpers (operands assumed already reduced, a, b < q)
  function automatic elem_t mod_add(elem_t a, elem_t b, elem_t q);
    logic [ELEM_W:0] s;
    s = {1'b0, a} + {1'b0, b};
    return (s >= {1'b0, q}) ? elem_t'(s - {1'b0, q}) : s[ELEM_W-1:0];
  endfunction

  function automatic elem_t mod_sub(elem_t a, elem_t b, elem_t q);
    return (a < b) ? (a - b + q) : (a - b);
  endfunction

endpackage
