// law_engine: the Long Arithmetic Word engine of one HPLE lane.
//
// It holds a modular multiplier, a modular adder and a modular subtractor,
// each adder/subtractor followed by its compare-and-correct step (the two
// comparators). A multiplexer in front of the multiplier picks its operands,
// and a second one picks whether the adder/subtractor sees the product or the
// second operand directly:
//   ADD : r0 = a + b mod q          SUB : r0 = a - b mod q
//   MUL : r0 = a * b mod q
//   BFLY: t = b * c mod q, r0 = a + t mod q, r1 = a - t mod q
// (a = VS, b = VT or the scalar, c = VT1). The unit set follows the paper;
// the exact mux placement and the single uniform latency for all operations
// (MUL_LAT + 1 cycles from in_valid to out_valid, one operation per cycle)
// are this design's choices, made so results leave in issue order.
module law_engine
  import rpu_pkg::*;
#(
  parameter int unsigned MUL_LAT = 4
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid,
  input  law_op_e op,
  input  elem_t   a,
  input  elem_t   b,
  input  elem_t   c,
  input  elem_t   q,
  output logic    out_valid,
  output elem_t   r0,
  output elem_t   r1
);
  localparam int unsigned D = MUL_LAT;

  elem_t   mx, my, prod;
  elem_t   a_d [D];
  elem_t   b_d [D];
  elem_t   q_d [D];
  law_op_e op_d [D];
  logic    v_d [D];

  // multiplier operand mux
  assign mx = (op == LOP_BFLY) ? b : a;
  assign my = (op == LOP_BFLY) ? c : b;

  mod_mul #(.W(ELEM_W), .LAT(MUL_LAT)) u_mul (
    .clk(clk), .a(mx), .b(my), .q(q), .r(prod)
  );

  always_ff @(posedge clk) begin
    a_d[0] <= a; b_d[0] <= b; q_d[0] <= q; op_d[0] <= op;
    for (int i = 1; i < D; i++) begin
      a_d[i] <= a_d[i-1]; b_d[i] <= b_d[i-1]; q_d[i] <= q_d[i-1]; op_d[i] <= op_d[i-1];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < D; i++) v_d[i] <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      v_d[0] <= in_valid;
      for (int i = 1; i < D; i++) v_d[i] <= v_d[i-1];
      out_valid <= v_d[D-1];
    end
  end

  // add/sub stage: second operand is the product or the bypassed b
  elem_t m, s_add, s_sub;
  assign m     = (op_d[D-1] == LOP_BFLY) ? prod : b_d[D-1];
  assign s_add = mod_add(a_d[D-1], m, q_d[D-1]);
  assign s_sub = mod_sub(a_d[D-1], m, q_d[D-1]);

  always_ff @(posedge clk) begin
    case (op_d[D-1])
      LOP_MUL: r0 <= prod;
      LOP_SUB: r0 <= s_sub;
      default: r0 <= s_add;
    endcase
    r1 <= s_sub;
  end
endmodule
