// tb_law_engine: self-checking test of the LAW engine.
//
// Drives one random operation per cycle (add, sub, mul, butterfly) with a
// random 128-bit modulus and operands below it, and compares r0/r1 with
// results computed here on 256-bit integers. Also checks that every result
// appears exactly MUL_LAT+1 cycles after its operands.
module tb_law_engine;
  import rpu_pkg::*;
  localparam int unsigned ML = 4, N = 400;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic in_valid = 1'b0, out_valid;
  law_op_e op = LOP_ADD;
  elem_t a = '0, b = '0, c = '0, q = 128'd1, r0, r1;

  law_engine #(.MUL_LAT(ML)) dut (.*);

  int checks = 0, failures = 0;
  elem_t e0 [$], e1 [$];
  law_op_e eop [$];
  int unsigned t_in [$];
  int unsigned cyc = 0;

  function automatic elem_t rnd_below(elem_t m);
    logic [255:0] v;
    v = {$urandom, $urandom, $urandom, $urandom};
    return 128'(v % 256'(m));
  endfunction

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // checker
  always @(posedge clk) if (rst_n && out_valid) begin
    elem_t x0, x1; law_op_e o; int unsigned t;
    x0 = e0.pop_front(); x1 = e1.pop_front(); o = eop.pop_front(); t = t_in.pop_front();
    checks++;
    if (r0 !== x0 || (o == LOP_BFLY && r1 !== x1)) begin
      failures++;
      if (failures < 10) $display("op %s: got %h/%h expected %h/%h", o.name(), r0, r1, x0, x1);
    end
    checks++;
    // result is valid MUL_LAT+1 cycles after the input cycle; this checker
    // samples it one edge later
    if (cyc - t != ML + 2) begin failures++; $display("latency %0d", cyc - t); end
  end

  initial begin
    logic [255:0] t, s;
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int n = 0; n < N; n++) begin
      elem_t qq, aa, bb, cc; law_op_e oo;
      qq = {$urandom, $urandom, $urandom, $urandom} | 128'h1;
      if (n % 7 == 0) qq = 128'hFFFFFFFF_FFFFFFFF_FFFFFFFF_FFFFFF61;
      aa = rnd_below(qq); bb = rnd_below(qq); cc = rnd_below(qq);
      if (n % 11 == 0) begin aa = qq - 1; bb = qq - 1; end
      oo = law_op_e'(n % 4);
      in_valid <= (n % 5 != 3); op <= oo; a <= aa; b <= bb; c <= cc; q <= qq;
      if (n % 5 != 3) begin
        case (oo)
          LOP_ADD: begin e0.push_back(128'((256'(aa) + 256'(bb)) % 256'(qq))); e1.push_back('0); end
          LOP_SUB: begin e0.push_back(128'((256'(aa) + 256'(qq) - 256'(bb)) % 256'(qq))); e1.push_back('0); end
          LOP_MUL: begin e0.push_back(128'((256'(aa) * 256'(bb)) % 256'(qq))); e1.push_back('0); end
          default: begin
            t = (256'(bb) * 256'(cc)) % 256'(qq);
            e0.push_back(128'((256'(aa) + t) % 256'(qq)));
            e1.push_back(128'((256'(aa) + 256'(qq) - t) % 256'(qq)));
          end
        endcase
        eop.push_back(oo);
        t_in.push_back(cyc);
      end
      @(posedge clk);
    end
    in_valid <= 1'b0;
    repeat (ML + 4) @(posedge clk);
    checks++;
    if (e0.size() != 0) begin failures++; $display("%0d results missing", e0.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
