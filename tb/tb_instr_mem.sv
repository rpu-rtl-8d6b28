// tb_instr_mem: self-checking test of the instruction memory.
//
// Fills the memory with random 64-bit words, reads them back in random order
// with the one-cycle read latency, and checks that a disabled read holds the
// previous output.
module tb_instr_mem;
  localparam int unsigned D = 256;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic we = 1'b0, re = 1'b0;
  logic [7:0] waddr = '0, raddr = '0;
  logic [63:0] wdata = '0, rdata;

  instr_mem #(.DEPTH(D)) dut (.*);

  int checks = 0, failures = 0;
  logic [63:0] ref_mem [D];

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(posedge clk);
    for (int a = 0; a < D; a++) begin
      ref_mem[a] = {$urandom, $urandom};
      we <= 1'b1; waddr <= 8'(a); wdata <= ref_mem[a];
      @(posedge clk);
    end
    we <= 1'b0;
    for (int n = 0; n < 1000; n++) begin
      int a;
      a = $urandom % D;
      re <= 1'b1; raddr <= 8'(a);
      @(posedge clk); #1;
      checks++;
      if (rdata !== ref_mem[a]) begin failures++; if (failures < 5) $display("word %0d wrong", a); end
      if (n % 10 == 0) begin
        re <= 1'b0; raddr <= 8'(a + 1);
        @(posedge clk); #1;
        checks++;
        if (rdata !== ref_mem[a]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
