// tb_rpu_full: the end-to-end test of tb_rpu_top run on the RPU at its
// default size: 128 HPLE lanes, 128 VDM banks, 4 MiB VDM, 512 KB instruction
// memory.
//
// The host loads a program, a modulus, a scalar, three base addresses and
// random input vectors, starts the kernel and waits for done. The program
// covers every B512 instruction, all addressing modes and both butterfly
// write cases. Afterwards every VDM word the program stored is read back and
// compared with an instruction-level reference model. The test also counts
// how often each stall mechanism occurred (busyboard hazard, full queue,
// compute and shuffle VRF memory conflicts, VDM bank collision, delayed VD1
// write) and fails if one never happened, and checks that the compute
// pipeline fires exactly 512/NUM_HPLES beats per compute instruction.
module tb_rpu_full;
  import rpu_pkg::*;
  import rpu_tb_pkg::*;

  localparam int unsigned L = 128, B = 128, WORDS = 262144, IMD = 65536;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start = 1'b0, busy, done;
  logic [15:0] start_pc = '0;
  logic im_we = 1'b0; logic [15:0] im_waddr = '0; logic [63:0] im_wdata = '0;
  logic sdm_we = 1'b0; logic [10:0] sdm_waddr = '0; elem_t sdm_wdata = '0;
  logic arf_we = 1'b0; reg_idx_t arf_waddr = '0; logic [31:0] arf_wdata = '0;
  logic vdm_en = 1'b0, vdm_we = 1'b0; logic [31:0] vdm_addr = '0; elem_t vdm_wdata = '0, vdm_rdata;
  logic [4:0] ev;

  rpu_top dut (
    .clk(clk), .rst_n(rst_n), .start(start), .start_pc(start_pc), .busy(busy), .done(done),
    .im_we(im_we), .im_waddr(im_waddr), .im_wdata(im_wdata),
    .sdm_we(sdm_we), .sdm_waddr(sdm_waddr), .sdm_wdata(sdm_wdata),
    .arf_we(arf_we), .arf_waddr(arf_waddr), .arf_wdata(arf_wdata),
    .vdm_en(vdm_en), .vdm_we(vdm_we), .vdm_addr(vdm_addr), .vdm_wdata(vdm_wdata),
    .vdm_rdata(vdm_rdata), .stall_events(ev)
  );

  int checks = 0, failures = 0;
  int unsigned cycles = 0;
  int unsigned n_ev [5] = '{0, 0, 0, 0, 0};
  int unsigned n_hold = 0, n_fire = 0, n_ci = 0;
  string ev_name [5] = '{"busyboard hazard", "queue full", "compute VRF conflict",
                         "shuffle VRF conflict", "VDM bank collision"};

  always @(posedge clk) if (rst_n && busy) begin
    cycles++;
    for (int i = 0; i < 5; i++) if (ev[i]) n_ev[i]++;
    if (dut.w1_from_hold) n_hold++;
    if (dut.fire) n_fire++;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  rpu_model m;
  prog_t prog;

  function automatic elem_t rnd_elem();
    elem_t v;
    v = {$urandom, $urandom, $urandom, $urandom};
    return (v >= Q) ? v - Q : v;
  endfunction


  initial begin
    elem_t d;
    m = new(WORDS);
    prog = build_program();
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    foreach (prog[i]) begin
      im_we <= 1'b1; im_waddr <= 16'(i); im_wdata <= prog[i];
      @(posedge clk);
      if (instr_class(prog[i]) == CLS_COMPUTE) n_ci++;
    end
    im_we <= 1'b0;
    sdm_we <= 1'b1; sdm_waddr <= 0; sdm_wdata <= Q; @(posedge clk);
    d = rnd_elem();
    sdm_waddr <= 1; sdm_wdata <= d; @(posedge clk);
    sdm_we <= 1'b0;
    m.sdm[0] = Q; m.sdm[1] = d;
    arf_we <= 1'b1;
    arf_waddr <= 1; arf_wdata <= IN_BASE;  @(posedge clk);
    arf_waddr <= 2; arf_wdata <= OUT_BASE; @(posedge clk);
    arf_waddr <= 3; arf_wdata <= TW_BASE;  @(posedge clk);
    arf_we <= 1'b0;
    m.arf[1] = IN_BASE; m.arf[2] = OUT_BASE; m.arf[3] = TW_BASE;
    for (int a = 0; a < 1792; a++) begin
      int unsigned wa;
      wa = (a < 1536) ? IN_BASE + a : TW_BASE + a - 1536;
      d = rnd_elem();
      m.vdm[wa] = d;
      vdm_en <= 1'b1; vdm_we <= 1'b1; vdm_addr <= wa; vdm_wdata <= d;
      @(posedge clk);
    end
    vdm_en <= 1'b0; vdm_we <= 1'b0;

    start <= 1'b1; @(posedge clk); start <= 1'b0;
    while (!done) @(posedge clk);
    $display("kernel done after %0d cycles", cycles);

    foreach (prog[i]) m.exec(prog[i]);

    for (int a = 0; a < OUT_WORDS; a++) begin
      if (!m.vdm.exists(OUT_BASE + a)) continue;
      vdm_en <= 1'b1; vdm_we <= 1'b0; vdm_addr <= OUT_BASE + a;
      @(posedge clk); vdm_en <= 1'b0;
      #1;
      checks++;
      if (vdm_rdata !== m.vdm[OUT_BASE + a]) begin
        failures++;
        if (failures < 10) $display("mismatch at word %0d: got %h expected %h",
                                    OUT_BASE + a, vdm_rdata, m.vdm[OUT_BASE + a]);
      end
    end

    for (int i = 0; i < 5; i++) begin
      checks++;
      $display("%s: %0d cycles", ev_name[i], n_ev[i]);
      if (n_ev[i] == 0) begin failures++; $display("mechanism never seen: %s", ev_name[i]); end
    end
    checks++;
    $display("delayed VD1 writes: %0d", n_hold);
    if (n_hold == 0) begin failures++; $display("same-memory butterfly never seen"); end
    checks++;
    if (n_fire != n_ci * (512 / L)) begin
      failures++; $display("compute beats %0d, expected %0d", n_fire, n_ci * (512 / L));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
