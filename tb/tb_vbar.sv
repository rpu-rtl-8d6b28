// tb_vbar: self-checking test of the vector crossbar.
//
// The bank side is a memory model in this testbench. For random lane
// addresses (spread, clustered on few banks, all equal) the test keeps
// presenting the unserved lanes until all are served and checks:
//   reads : every lane gets the word at its address, and the number of
//           cycles equals the largest number of distinct rows any bank is
//           asked for (same-row requests share one access);
//   writes: every word lands, and the cycle count equals the largest number
//           of lanes on one bank.
module tb_vbar;
  import rpu_pkg::*;
  localparam int unsigned NH = 16, NB = 8, RW = 6, WORDS = NB * 64;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic we = 1'b0;
  logic lane_req [NH];
  logic [31:0] lane_addr [NH];
  elem_t lane_wdata [NH];
  logic served [NH];
  logic lane_rvalid [NH];
  elem_t lane_rdata [NH];
  logic bank_en [NB];
  logic bank_we [NB];
  logic [RW-1:0] bank_row [NB];
  elem_t bank_wdata [NB];
  elem_t bank_rdata [NB];

  vbar #(.NUM_HPLES(NH), .NUM_BANKS(NB), .ROW_W(RW)) dut (.*);

  elem_t mem [WORDS];
  always @(posedge clk) begin
    for (int b = 0; b < NB; b++) if (bank_en[b]) begin
      if (bank_we[b]) mem[32'(bank_row[b]) * NB + b] <= bank_wdata[b];
      else bank_rdata[b] <= mem[32'(bank_row[b]) * NB + b];
    end
  end

  int checks = 0, failures = 0;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < NH; k++) begin lane_req[k] = 0; lane_addr[k] = 0; lane_wdata[k] = 0; end
    for (int a = 0; a < WORDS; a++) mem[a] = {$urandom, $urandom, $urandom, $urandom};
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int n = 0; n < 300; n++) begin
      logic pend [NH];
      elem_t got [NH];
      int unsigned addr [NH];
      int cyc, expect_cyc, kind;
      logic w;
      elem_t exp_mem [WORDS];
      kind = n % 3;
      w = (n % 2) == 1;
      for (int k = 0; k < NH; k++) begin
        case (kind)
          0: addr[k] = $urandom % WORDS;
          1: addr[k] = ($urandom % 2) * NB + ($urandom % 3) + NB * 8 * ($urandom % 4);
          default: addr[k] = 37;
        endcase
        if (w && kind == 2) addr[k] = 37 + k * NB;  // one bank, distinct rows
        pend[k] = 1;
      end
      // expected cycles
      expect_cyc = 0;
      for (int b = 0; b < NB; b++) begin
        int cnt; int unsigned rows [$];
        cnt = 0;
        rows.delete();
        for (int k = 0; k < NH; k++) if (addr[k] % NB == b) begin
          cnt++;
          if (!(addr[k] / NB inside {rows})) rows.push_back(addr[k] / NB);
        end
        if (w) begin if (cnt > expect_cyc) expect_cyc = cnt; end
        else if (rows.size() > expect_cyc) expect_cyc = rows.size();
      end
      exp_mem = mem;
      for (int k = 0; k < NH; k++) lane_wdata[k] = {$urandom, $urandom, $urandom, $urandom};
      if (w) for (int k = 0; k < NH; k++) exp_mem[addr[k]] = lane_wdata[k];
      cyc = 0;
      we = w;
      forever begin
        logic any;
        any = 0;
        for (int k = 0; k < NH; k++) begin lane_req[k] = pend[k]; lane_addr[k] = addr[k]; any |= pend[k]; end
        if (!any) break;
        #1;
        for (int k = 0; k < NH; k++) if (served[k]) pend[k] = 0;
        @(posedge clk);
        cyc++;
        #1;
        for (int k = 0; k < NH; k++) if (lane_rvalid[k]) got[k] = lane_rdata[k];
      end
      for (int k = 0; k < NH; k++) lane_req[k] = 0;
      @(posedge clk); #1;
      if (!w) for (int k = 0; k < NH; k++) begin
        checks++;
        if (got[k] !== mem[addr[k]]) begin failures++; if (failures < 5) $display("lane %0d read wrong", k); end
      end else begin
        checks++;
        if (mem != exp_mem) begin failures++; if (failures < 5) $display("write pattern %0d wrong", n); end
      end
      checks++;
      if (cyc != expect_cyc) begin
        failures++; if (failures < 5) $display("pattern %0d took %0d cycles, expected %0d", n, cyc, expect_cyc);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
