// busyboard: the front-end's dependence tracker.
//
// Three bit arrays, one bit per register of the vector, scalar and modulus
// register files. A dispatched instruction sets the bits of every register it
// reads or writes; the pipeline that executes it clears them when it
// completes. An instruction whose registers overlap any set bit is a hazard
// and stalls the front-end. This covers RAW, WAR and WAW hazards without
// renaming. Tracking all used vector registers follows the paper; the
// separate scalar and modulus boards are this design's reading of the
// "busy boards" of the block diagram. Clears and sets of one cycle take
// effect in the next; a hazard is judged on the registered bits.
module busyboard
  import rpu_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  reg_mask_t chk_v, chk_s, chk_m,
  output logic      hazard,
  input  logic      set_en,
  input  reg_mask_t set_v, set_s, set_m,
  input  reg_mask_t clr_v, clr_s, clr_m,
  output reg_mask_t busy_v, busy_s, busy_m
);
  assign hazard = |(chk_v & busy_v) || |(chk_s & busy_s) || |(chk_m & busy_m);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_v <= '0; busy_s <= '0; busy_m <= '0;
    end else begin
      busy_v <= (busy_v & ~clr_v) | (set_en ? set_v : '0);
      busy_s <= (busy_s & ~clr_s) | (set_en ? set_s : '0);
      busy_m <= (busy_m & ~clr_m) | (set_en ? set_m : '0);
    end
  end
endmodule
