// tb_vrf_slice: self-checking test of one lane's VRF slice.
//
// Each cycle enables a random set of ports on distinct single-port memories
// (as the port arbiter guarantees), with random registers, slots and
// directions, and checks read data one cycle later against a reference
// register array. Registers sharing a memory (r, r+16, r+32, r+48) must keep
// separate contents.
module tb_vrf_slice;
  import rpu_pkg::*;
  localparam int unsigned NH = 128, EPL = VLEN / NH;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  vrf_req_t req [NPORTS];
  elem_t wdata [NPORTS];
  elem_t rdata [NPORTS];

  vrf_slice #(.NUM_HPLES(NH)) dut (.*);

  int checks = 0, failures = 0;
  elem_t regs [64][EPL];
  logic  rd_pend [NPORTS];
  elem_t rd_exp [NPORTS];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int p = 0; p < NPORTS; p++) begin req[p] = '0; wdata[p] = '0; rd_pend[p] = 0; end
    // initialise all registers through port P_LW
    for (int r = 0; r < 64; r++) for (int s = 0; s < EPL; s++) begin
      regs[r][s] = {$urandom, $urandom, $urandom, $urandom};
      req[P_LW] <= '{en: 1, we: 1, rg: 6'(r), slot: 9'(s)};
      wdata[P_LW] <= regs[r][s];
      @(posedge clk);
    end
    req[P_LW] <= '0;
    for (int n = 0; n < 3000; n++) begin
      logic [15:0] used;
      vrf_req_t rq [NPORTS];
      elem_t wd [NPORTS];
      used = '0;
      for (int p = 0; p < NPORTS; p++) begin
        int r;
        r = $urandom % 64;
        rq[p] = '0;
        wd[p] = {$urandom, $urandom, $urandom, $urandom};
        if (($urandom % 2) && !used[r % 16]) begin
          used[r % 16] = 1'b1;
          rq[p] = '{en: 1, we: (p < 4) ? 1'($urandom % 2) : 1'b0, rg: 6'(r), slot: 9'($urandom % EPL)};
        end
      end
      for (int p = 0; p < NPORTS; p++) begin req[p] <= rq[p]; wdata[p] <= wd[p]; end
      @(posedge clk);
      #1;
      for (int p = 0; p < NPORTS; p++) begin
        rd_pend[p] = rq[p].en && !rq[p].we;
        if (rd_pend[p]) rd_exp[p] = regs[rq[p].rg][rq[p].slot];
      end
      for (int p = 0; p < NPORTS; p++) if (rd_pend[p]) begin
        checks++;
        if (rdata[p] !== rd_exp[p]) begin
          failures++; if (failures < 5) $display("port %0d read wrong: got %h exp %h n=%0d", p, rdata[p], rd_exp[p], n);
        end
      end
      for (int p = 0; p < NPORTS; p++) if (rq[p].en && rq[p].we) regs[rq[p].rg][rq[p].slot] = wd[p];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
