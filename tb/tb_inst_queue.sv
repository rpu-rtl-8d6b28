// tb_inst_queue: self-checking test of an instruction queue.
//
// Random pushes (when not full) and pops (when valid) are checked against a
// SystemVerilog queue used as the reference FIFO, including the full and
// valid flags and back-to-back push/pop at the full and empty boundaries.
module tb_inst_queue;
  import rpu_pkg::*;
  localparam int unsigned D = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic push = 1'b0, pop = 1'b0, full, valid;
  instr_t din = '0, dout;

  inst_queue #(.DEPTH(D)) dut (.*);

  int checks = 0, failures = 0;
  instr_t model [$];

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int n = 0; n < 3000; n++) begin
      logic pu, po;
      instr_t d;
      #1;
      checks++;
      if (full !== (model.size() == D) || valid !== (model.size() != 0)) begin
        failures++; if (failures < 5) $display("flags wrong, size %0d", model.size());
      end
      if (valid) begin
        checks++;
        if (dout !== model[0]) begin failures++; if (failures < 5) $display("head wrong"); end
      end
      pu = (($urandom % 100) < ((n / 500) % 2 ? 70 : 30)) && !full;
      po = ($urandom % 2) && valid;
      d  = instr_t'({$urandom, $urandom});
      push <= pu; pop <= po; din <= d;
      @(posedge clk);
      if (po) void'(model.pop_front());
      if (pu) model.push_back(d);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
