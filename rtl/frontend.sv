// frontend: in-order fetch, decode, hazard check and dispatch.
//
// A start pulse with an instruction-memory pointer (from the controlling
// RISC-V core) begins a kernel. The front-end reads one instruction per cycle
// from the instruction memory (one cycle read latency), decodes its class and
// the registers it uses, and checks them against the busyboard. If any is
// busy, or the target queue is full, the whole front-end stalls on that
// instruction (no renaming, no reordering). Otherwise the instruction is
// pushed into the load/store, compute or shuffle queue and its registers are
// marked busy. NOP is dropped. HALT stops fetching; once all queues and
// pipelines are idle and no register is busy, done pulses for one cycle and
// busy falls. The HALT/NOP opcodes and the done handshake are this design's
// own; the paper describes the start command, in-order decode, busyboard and
// the three queues.
module frontend
  import rpu_pkg::*;
#(
  parameter int unsigned IM_AW = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [IM_AW-1:0] start_pc,
  output logic             busy,
  output logic             done,
  // instruction memory read port
  output logic             im_re,
  output logic [IM_AW-1:0] im_raddr,
  input  logic [63:0]      im_rdata,
  // queues
  output logic             push_ls, push_cmp, push_shf,
  output instr_t           push_instr,
  input  logic             full_ls, full_cmp, full_shf,
  // completion from the pipelines
  input  logic             rel_ls, rel_cmp, rel_shf,
  input  instr_t           rel_ls_instr, rel_cmp_instr, rel_shf_instr,
  input  logic             backend_idle,
  // event counters for observation
  output logic             hazard_stall,
  output logic             queue_stall
);
  logic             running, halted, rd_pend, hold_valid;
  logic [IM_AW-1:0] pc;
  instr_t           hold, cur;
  logic             cur_valid, hazard, qfull, fire, issue;
  instr_class_e     cls;
  reg_mask_t        busy_v, busy_s, busy_m;

  assign cur       = rd_pend ? instr_t'(im_rdata) : hold;
  assign cur_valid = running && !halted && (rd_pend || hold_valid);
  assign cls       = instr_class(cur);

  busyboard u_bb (
    .clk(clk), .rst_n(rst_n),
    .chk_v(vregs_used(cur)), .chk_s(sregs_used(cur)), .chk_m(mregs_used(cur)),
    .hazard(hazard),
    .set_en(fire),
    .set_v(vregs_used(cur)), .set_s(sregs_used(cur)), .set_m(mregs_used(cur)),
    .clr_v((rel_ls ? vregs_used(rel_ls_instr) : '0) | (rel_cmp ? vregs_used(rel_cmp_instr) : '0)
           | (rel_shf ? vregs_used(rel_shf_instr) : '0)),
    .clr_s((rel_ls ? sregs_used(rel_ls_instr) : '0) | (rel_cmp ? sregs_used(rel_cmp_instr) : '0)),
    .clr_m((rel_ls ? mregs_used(rel_ls_instr) : '0) | (rel_cmp ? mregs_used(rel_cmp_instr) : '0)),
    .busy_v(busy_v), .busy_s(busy_s), .busy_m(busy_m)
  );

  always_comb begin
    case (cls)
      CLS_LDST:    qfull = full_ls;
      CLS_COMPUTE: qfull = full_cmp;
      CLS_SHUFFLE: qfull = full_shf;
      default:     qfull = 1'b0;
    endcase
  end

  assign fire  = cur_valid && !hazard && !qfull;
  assign issue = running && !halted && (!cur_valid || fire)
              && !(fire && cur.opcode == OP_HALT);
  assign im_re    = issue;
  assign im_raddr = pc;

  assign push_instr = cur;
  assign push_ls    = fire && cls == CLS_LDST;
  assign push_cmp   = fire && cls == CLS_COMPUTE;
  assign push_shf   = fire && cls == CLS_SHUFFLE;

  assign hazard_stall = cur_valid && hazard;
  assign queue_stall  = cur_valid && !hazard && qfull;

  logic drained;
  assign drained = halted && backend_idle && !push_ls && !push_cmp && !push_shf
                && busy_v == '0 && busy_s == '0 && busy_m == '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0; halted <= 1'b0; rd_pend <= 1'b0; hold_valid <= 1'b0;
      pc <= '0; hold <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!running) begin
        if (start) begin
          running <= 1'b1; halted <= 1'b0; pc <= start_pc;
          rd_pend <= 1'b0; hold_valid <= 1'b0;
        end
      end else begin
        rd_pend    <= issue;
        hold       <= cur;
        hold_valid <= cur_valid && !fire;
        if (issue) pc <= pc + 1'b1;
        if (fire && cur.opcode == OP_HALT) halted <= 1'b1;
        if (drained) begin
          running <= 1'b0; halted <= 1'b0; done <= 1'b1;
        end
      end
    end
  end

  assign busy = running;
endmodule
