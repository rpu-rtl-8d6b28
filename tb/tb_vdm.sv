// tb_vdm: self-checking test of the banked vector data memory.
//
// Writes random words through the host port, reads them back through the
// host port and through the bank ports (one cycle read latency), writes
// through the bank ports and reads back through the host port, and checks
// that a bank access takes precedence over the host in the same cycle.
module tb_vdm;
  import rpu_pkg::*;
  localparam int unsigned NB = 4, D = 64;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic       bank_en [NB];
  logic       bank_we [NB];
  logic [5:0] bank_row [NB];
  elem_t      bank_wdata [NB];
  elem_t      bank_rdata [NB];
  logic       host_en = 1'b0, host_we = 1'b0;
  logic [31:0] host_addr = '0;
  elem_t      host_wdata = '0, host_rdata;

  vdm #(.NUM_BANKS(NB), .BANK_DEPTH(D)) dut (.*);

  int checks = 0, failures = 0;
  elem_t ref_mem [NB*D];

  task automatic check(elem_t got, elem_t exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("%s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int b = 0; b < NB; b++) begin bank_en[b] = 0; bank_we[b] = 0; bank_row[b] = 0; bank_wdata[b] = 0; end
    @(posedge clk);
    for (int a = 0; a < NB*D; a++) begin
      ref_mem[a] = {$urandom, $urandom, $urandom, $urandom};
      host_en <= 1; host_we <= 1; host_addr <= a; host_wdata <= ref_mem[a];
      @(posedge clk);
    end
    host_we <= 0;
    for (int a = 0; a < NB*D; a++) begin
      host_en <= 1; host_addr <= a;
      @(posedge clk); #1;
      check(host_rdata, ref_mem[a], "host read");
    end
    host_en <= 0;
    // bank-port reads: all banks in parallel, word a = row*NB + bank
    for (int r = 0; r < D; r++) begin
      for (int b = 0; b < NB; b++) begin bank_en[b] <= 1; bank_we[b] <= 0; bank_row[b] <= 6'(r); end
      @(posedge clk); #1;
      for (int b = 0; b < NB; b++) check(bank_rdata[b], ref_mem[r*NB + b], "bank read");
    end
    // bank-port writes
    for (int r = 0; r < D; r++) begin
      for (int b = 0; b < NB; b++) begin
        ref_mem[r*NB + b] = {$urandom, $urandom, $urandom, $urandom};
        bank_en[b] <= 1; bank_we[b] <= 1; bank_row[b] <= 6'(r); bank_wdata[b] <= ref_mem[r*NB + b];
      end
      @(posedge clk);
    end
    for (int b = 0; b < NB; b++) bank_en[b] <= 0;
    // host write colliding with a bank write to the same bank is dropped
    bank_en[1] <= 1; bank_we[1] <= 1; bank_row[1] <= 6'd3; bank_wdata[1] <= 128'h1234;
    host_en <= 1; host_we <= 1; host_addr <= 3*NB + 1; host_wdata <= 128'h5678;
    ref_mem[3*NB + 1] = 128'h1234;
    @(posedge clk);
    bank_en[1] <= 0; host_we <= 0;
    for (int a = 0; a < NB*D; a++) begin
      host_en <= 1; host_addr <= a;
      @(posedge clk); #1;
      check(host_rdata, ref_mem[a], "host read after bank writes");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
