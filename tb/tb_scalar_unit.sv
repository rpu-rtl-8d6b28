// tb_scalar_unit: self-checking test of SDM, SRF, MRF and ARF.
//
// Writes random SDM words and ARF addresses through the host ports, copies
// SDM words into random SRF and MRF registers the way SLOAD/MLOAD do (SDM
// read, then register write in the next cycle), and checks every read port
// against reference arrays kept here.
module tb_scalar_unit;
  import rpu_pkg::*;
  localparam int unsigned SD = 64;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic host_sdm_we = 0, host_arf_we = 0, sdm_re = 0, srf_we = 0, mrf_we = 0;
  logic [5:0] host_sdm_addr = '0, sdm_raddr = '0;
  elem_t host_sdm_wdata = '0, sdm_rdata, sm_wdata, srf_rdata, mrf_rdata;
  reg_idx_t host_arf_addr = '0, sm_waddr = '0, arf_raddr = '0, srf_raddr = '0, mrf_raddr = '0;
  logic [31:0] host_arf_wdata = '0, arf_rdata;

  assign sm_wdata = sdm_rdata;
  scalar_unit #(.SDM_DEPTH(SD)) dut (.*);

  int checks = 0, failures = 0;
  elem_t rs [SD];
  elem_t rsrf [64];
  elem_t rmrf [64];
  logic [31:0] rarf [64];

  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("%s wrong", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(posedge clk);
    for (int a = 0; a < SD; a++) begin
      rs[a] = {$urandom, $urandom, $urandom, $urandom};
      host_sdm_we <= 1; host_sdm_addr <= 6'(a); host_sdm_wdata <= rs[a];
      @(posedge clk);
    end
    host_sdm_we <= 0;
    for (int r = 0; r < 64; r++) begin
      rarf[r] = $urandom;
      host_arf_we <= 1; host_arf_addr <= 6'(r); host_arf_wdata <= rarf[r];
      @(posedge clk);
    end
    host_arf_we <= 0;
    // fill SRF and MRF from the SDM
    for (int r = 0; r < 64; r++) begin
      for (int f = 0; f < 2; f++) begin
        int a;
        a = $urandom % SD;
        sdm_re <= 1; sdm_raddr <= 6'(a);
        @(posedge clk);
        sdm_re <= 0; sm_waddr <= 6'(r);
        if (f == 0) begin srf_we <= 1; rsrf[r] = rs[a]; end
        else begin mrf_we <= 1; rmrf[r] = rs[a]; end
        #1 chk(sdm_rdata === rs[a], "SDM read");
        @(posedge clk);
        srf_we <= 0; mrf_we <= 0;
      end
    end
    @(posedge clk);
    for (int n = 0; n < 200; n++) begin
      int x, y, z;
      x = $urandom % 64; y = $urandom % 64; z = $urandom % 64;
      srf_raddr <= 6'(x); mrf_raddr <= 6'(y); arf_raddr <= 6'(z);
      @(posedge clk); #1;
      chk(srf_rdata === rsrf[x], "SRF");
      chk(mrf_rdata === rmrf[y], "MRF");
      chk(arf_rdata === rarf[z], "ARF");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
