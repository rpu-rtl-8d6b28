// tb_busyboard: self-checking test of the busyboard.
//
// Random sequences of set and clear masks on the three boards are compared
// with a reference copy of the bits kept here, and the hazard output is
// checked for random check masks, one cycle after each update.
module tb_busyboard;
  import rpu_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  reg_mask_t chk_v = '0, chk_s = '0, chk_m = '0;
  reg_mask_t set_v = '0, set_s = '0, set_m = '0, clr_v = '0, clr_s = '0, clr_m = '0;
  reg_mask_t busy_v, busy_s, busy_m;
  logic set_en = 1'b0, hazard;

  busyboard dut (.*);

  int checks = 0, failures = 0;
  reg_mask_t rv = '0, rs = '0, rm = '0;

  function automatic reg_mask_t rmask(int density);
    reg_mask_t m;
    for (int i = 0; i < 64; i++) m[i] = ($urandom % 100) < density;
    return m;
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    #1;
    checks++; if (busy_v != '0 || busy_s != '0 || busy_m != '0) failures++;
    for (int n = 0; n < 1000; n++) begin
      logic en;
      reg_mask_t sv, ss, sm, cv, cs, cm;
      en = $urandom % 2;
      sv = rmask(5); ss = rmask(5); sm = rmask(5);
      cv = rmask(20); cs = rmask(20); cm = rmask(20);
      set_en <= en; set_v <= sv; set_s <= ss; set_m <= sm;
      clr_v <= cv; clr_s <= cs; clr_m <= cm;
      rv = (rv & ~cv) | (en ? sv : '0);
      rs = (rs & ~cs) | (en ? ss : '0);
      rm = (rm & ~cm) | (en ? sm : '0);
      @(posedge clk);
      #1;
      chk_v = rmask(3); chk_s = rmask(3); chk_m = rmask(3);
      #1;
      checks++;
      if (busy_v !== rv || busy_s !== rs || busy_m !== rm) begin
        failures++; if (failures < 5) $display("bits differ at step %0d", n);
      end
      checks++;
      if (hazard !== (|(chk_v & rv) || |(chk_s & rs) || |(chk_m & rm))) begin
        failures++; if (failures < 5) $display("hazard wrong at step %0d", n);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
