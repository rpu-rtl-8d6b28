// rpu_tb_pkg: test program and instruction-level reference model shared by
// the RPU end-to-end testbenches.
//
// The model executes B512 instructions one after another on plain arrays
// (no lanes, banks or pipelines) with its own modular arithmetic and address
// generation, so its results are independent of the RTL's datapath. The test
// program exercises every instruction, every addressing mode, both butterfly
// write cases and the hazards the RPU must stall on.
package rpu_tb_pkg;
  import rpu_pkg::*;

  localparam logic [127:0] Q = 128'hFFFFFFFF_FFFFFFFF_FFFFFFFF_FFFFFF61;

  function automatic instr_t mk_ls(opcode_e op, reg_idx_t vd, logic [19:0] addr,
                                   logic [1:0] mode, logic [3:0] value, reg_idx_t rm);
    instr_t i;
    i = '0; i.opcode = op; i.vd = vd; i.addr = addr;
    i.vs = {4'd0, mode}; i.vt = {2'd0, value}; i.rm = rm;
    return i;
  endfunction

  function automatic instr_t mk_sc(opcode_e op, reg_idx_t rt, logic [19:0] addr);
    instr_t i;
    i = '0; i.opcode = op; i.addr = addr; i.vt = rt;
    return i;
  endfunction

  function automatic instr_t mk_ci(opcode_e op, reg_idx_t vd, reg_idx_t vs, reg_idx_t vt,
                                   reg_idx_t rm);
    instr_t i;
    i = '0; i.opcode = op; i.vd = vd; i.vs = vs; i.vt = vt; i.rm = rm;
    return i;
  endfunction

  function automatic instr_t mk_bfly(reg_idx_t vd, reg_idx_t vd1, reg_idx_t vs, reg_idx_t vt,
                                     reg_idx_t vt1, reg_idx_t rm);
    instr_t i;
    i = mk_ci(OP_VMUL_VV, vd, vs, vt, rm);
    i.bfly = 1'b1; i.vd1_f = {3'd0, vd1}; i.vt1 = vt1;
    return i;
  endfunction

  function automatic instr_t mk_op(opcode_e op);
    instr_t i;
    i = '0; i.opcode = op;
    return i;
  endfunction

  // ARF[1] = input area, ARF[2] = output area, ARF[3] = twiddle area
  localparam int unsigned IN_BASE = 0, TW_BASE = 2048, OUT_BASE = 4096;

  typedef instr_t prog_t [$];

  // registers stored at the end, in order, to OUT_BASE + 512*k
  localparam int NOUT = 20;
  localparam reg_idx_t OUT_REGS [NOUT] = '{60, 59, 58, 57, 56, 55, 54, 53, 40, 41,
                                          42, 26, 30, 31, 32, 33, 34, 21, 22, 23};

  function automatic prog_t build_program();
    prog_t p;
    p.push_back(mk_sc(OP_MLOAD, 6'd1, 20'd0));
    p.push_back(mk_sc(OP_SLOAD, 6'd5, 20'd1));
    p.push_back(mk_ls(OP_VLOAD, 6'd60, 20'd0,   AM_CONTIG,   4'd0, 6'd1));
    p.push_back(mk_ls(OP_VLOAD, 6'd20, 20'd512, AM_CONTIG,   4'd0, 6'd1));
    p.push_back(mk_ls(OP_VLOAD, 6'd19, 20'd0,   AM_REPEATED, 4'd1, 6'd3));
    p.push_back(mk_ls(OP_VLOAD, 6'd44, 20'd1024, AM_CONTIG,  4'd0, 6'd1));
    p.push_back(mk_ci(OP_VMUL_VV, 6'd59, 6'd20, 6'd19, 6'd1));
    p.push_back(mk_ci(OP_VADD_VV, 6'd58, 6'd60, 6'd59, 6'd1));
    p.push_back(mk_ci(OP_VSUB_VV, 6'd57, 6'd60, 6'd59, 6'd1));
    p.push_back(mk_ci(OP_UNPKLO,  6'd56, 6'd58, 6'd57, 6'd0));
    p.push_back(mk_ci(OP_UNPKHI,  6'd55, 6'd58, 6'd57, 6'd0));
    p.push_back(mk_ci(OP_PKLO,    6'd54, 6'd58, 6'd57, 6'd0));
    p.push_back(mk_ci(OP_PKHI,    6'd53, 6'd58, 6'd57, 6'd0));
    p.push_back(mk_bfly(6'd40, 6'd41, 6'd60, 6'd20, 6'd19, 6'd1));   // different memories
    p.push_back(mk_bfly(6'd42, 6'd26, 6'd60, 6'd20, 6'd19, 6'd1));   // same memory (10)
    p.push_back(mk_ci(OP_VMUL_VS, 6'd30, 6'd60, 6'd5, 6'd1));
    p.push_back(mk_ci(OP_VADD_VS, 6'd31, 6'd20, 6'd5, 6'd1));
    p.push_back(mk_ci(OP_VSUB_VS, 6'd32, 6'd19, 6'd5, 6'd1));
    p.push_back(mk_ci(OP_VADD_VV, 6'd33, 6'd60, 6'd44, 6'd1));      // VS, VT share memory 12
    p.push_back(mk_ci(OP_UNPKLO,  6'd34, 6'd60, 6'd44, 6'd0));      // shuffle reads share memory
    p.push_back(mk_ls(OP_VLOAD, 6'd21, 20'd0,   AM_STRIDED,  4'd1, 6'd1));
    p.push_back(mk_ls(OP_VLOAD, 6'd22, 20'd0,   AM_STRSKIP,  4'd2, 6'd1));
    p.push_back(mk_ls(OP_VLOAD, 6'd23, 20'd5,   AM_REPEATED, 4'd9, 6'd1)); // broadcast
    p.push_back(mk_op(OP_NOP));
    for (int k = 0; k < NOUT; k++)
      p.push_back(mk_ls(OP_VSTORE, OUT_REGS[k], 20'(512 * k), AM_CONTIG, 4'd0, 6'd2));
    // a strided and a strided-skip store of V60 after the output area
    p.push_back(mk_ls(OP_VSTORE, 6'd60, 20'(512 * NOUT), AM_STRIDED, 4'd1, 6'd2));
    p.push_back(mk_ls(OP_VSTORE, 6'd20, 20'(512 * NOUT + 1024), AM_STRSKIP, 4'd3, 6'd2));
    p.push_back(mk_op(OP_HALT));
    return p;
  endfunction

  // words of the VDM the program writes (checked after the run)
  localparam int unsigned OUT_WORDS = 512 * NOUT + 2048;

  class rpu_model;
    logic [127:0] vrf [64][512];
    logic [127:0] srf [64];
    logic [127:0] mrf [64];
    logic [31:0]  arf [64];
    logic [127:0] sdm [int];
    logic [127:0] vdm [int];
    int unsigned  vdm_words;

    function new(int unsigned words);
      vdm_words = words;
    endfunction

    static function logic [127:0] madd(logic [127:0] a, logic [127:0] b, logic [127:0] q);
      logic [255:0] s;
      s = 256'(a) + 256'(b);
      return 128'(s % 256'(q));
    endfunction
    static function logic [127:0] msub(logic [127:0] a, logic [127:0] b, logic [127:0] q);
      logic [255:0] s;
      s = 256'(a) + 256'(q) - 256'(b);
      return 128'(s % 256'(q));
    endfunction
    static function logic [127:0] mmul(logic [127:0] a, logic [127:0] b, logic [127:0] q);
      logic [255:0] s;
      s = 256'(a) * 256'(b);
      return 128'(s % 256'(q));
    endfunction

    function int unsigned addr(int unsigned base, int e, int mode, int v);
      int unsigned off;
      case (mode)
        0: off = e;
        1: off = e * (1 << v);
        2: off = (e / (1 << v)) * (2 << v) + (e % (1 << v));
        default: off = e / (1 << v);
      endcase
      return (base + off) % vdm_words;
    endfunction

    function logic [127:0] rd_vdm(int unsigned a);
      return vdm.exists(a) ? vdm[a] : 128'd0;
    endfunction

    function void exec(instr_t i);
      logic [127:0] q, t, src [512];
      int unsigned base;
      q = mrf[i.rm];
      case (i.opcode)
        OP_VLOAD: begin
          base = arf[i.rm] + 32'(i.addr);
          for (int e = 0; e < 512; e++) vrf[i.vd][e] = rd_vdm(addr(base, e, i.vs[1:0], i.vt[3:0]));
        end
        OP_VSTORE: begin
          base = arf[i.rm] + 32'(i.addr);
          for (int e = 0; e < 512; e++) vdm[addr(base, e, i.vs[1:0], i.vt[3:0])] = vrf[i.vd][e];
        end
        OP_SLOAD: srf[i.vt] = sdm[int'(i.addr)];
        OP_MLOAD: mrf[i.vt] = sdm[int'(i.addr)];
        OP_VADD_VV, OP_VSUB_VV, OP_VMUL_VV: begin
          for (int e = 0; e < 512; e++) begin
            if (i.bfly) begin
              t = mmul(vrf[i.vt][e], vrf[i.vt1][e], q);
              src[e] = msub(vrf[i.vs][e], t, q);
              vrf[i.vd][e] = madd(vrf[i.vs][e], t, q);
            end else if (i.opcode == OP_VADD_VV) vrf[i.vd][e] = madd(vrf[i.vs][e], vrf[i.vt][e], q);
            else if (i.opcode == OP_VSUB_VV) vrf[i.vd][e] = msub(vrf[i.vs][e], vrf[i.vt][e], q);
            else vrf[i.vd][e] = mmul(vrf[i.vs][e], vrf[i.vt][e], q);
          end
          if (i.bfly) for (int e = 0; e < 512; e++) vrf[i.vd1_f[5:0]][e] = src[e];
        end
        OP_VADD_VS: for (int e = 0; e < 512; e++) vrf[i.vd][e] = madd(vrf[i.vs][e], srf[i.vt], q);
        OP_VSUB_VS: for (int e = 0; e < 512; e++) vrf[i.vd][e] = msub(vrf[i.vs][e], srf[i.vt], q);
        OP_VMUL_VS: for (int e = 0; e < 512; e++) vrf[i.vd][e] = mmul(vrf[i.vs][e], srf[i.vt], q);
        OP_UNPKLO, OP_UNPKHI, OP_PKLO, OP_PKHI: begin
          for (int e = 0; e < 256; e++) begin
            case (i.opcode)
              OP_UNPKLO: begin src[2*e] = vrf[i.vs][e];     src[2*e+1] = vrf[i.vt][e]; end
              OP_UNPKHI: begin src[2*e] = vrf[i.vs][256+e]; src[2*e+1] = vrf[i.vt][256+e]; end
              OP_PKLO:   begin src[e] = vrf[i.vs][2*e];     src[256+e] = vrf[i.vt][2*e]; end
              default:   begin src[e] = vrf[i.vs][2*e+1];   src[256+e] = vrf[i.vt][2*e+1]; end
            endcase
          end
          for (int e = 0; e < 512; e++) vrf[i.vd][e] = src[e];
        end
        default: ;
      endcase
    endfunction
  endclass
endpackage
