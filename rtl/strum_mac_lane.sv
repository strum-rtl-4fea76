// strum_mac_lane: one of the 8 product lanes of a StruM PE.
//
// A lane holds an INT8 x INT8 multiplier, a barrel shifter, or both. A lane
// with both (the run-time configurable PE) takes its role from one bit of the
// barrel shifter enable register: 1 selects the shifter, and the multiplier
// enable is the inverse of that bit. A lane only with a multiplier or only
// with a shifter is the statically configured PE.
//
// The unit that is not in use has its operands held at zero (operand
// isolation) so that it does not toggle; in silicon this is where the clock
// gate of the multiplier sits. An idle lane (valid = 0) outputs zero, so the
// adder tree may sum all lanes. Combinational.
//
// Interface: act is the activation routed to the lane, wfield the decoded
// weight field (an INT8 weight, or a q-bit {sign, shift} code in its low
// bits), use_shift the lane's role.
//
// From the paper: per-lane multiplier plus shifter with "Mult enable" as the
// inverted "Barrel shifter enable" (Fig. 9), multipliers disabled when the
// shifter is enabled. This design's choice: operand isolation in place of a
// clock-gating cell, which is a library cell and has no RTL of its own here.
module strum_mac_lane
  import strum_pkg::*;
#(
  parameter bit          HAS_MULT  = 1'b1,
  parameter bit          HAS_SHIFT = 1'b1,
  parameter int unsigned L         = 7,
  parameter int unsigned Q         = q_bits(L)
) (
  input  logic   valid,
  input  logic   use_shift,
  input  act_t   act,
  input  wbyte_t wfield,
  output prod_t  prod
);
  logic  mult_en, shift_en;
  prod_t mult_p, shift_p;

  assign shift_en = HAS_SHIFT && valid && (use_shift || !HAS_MULT);
  assign mult_en  = HAS_MULT  && valid && !shift_en;

  if (HAS_MULT) begin : g_mult
    act_t ma, mw;
    assign ma     = mult_en ? act : '0;
    assign mw     = mult_en ? act_t'(wfield) : '0;
    assign mult_p = prod_t'(ma) * prod_t'(mw);
  end else begin : g_no_mult
    assign mult_p = '0;
  end

  if (HAS_SHIFT) begin : g_shift
    act_t         sa;
    logic [Q-1:0] sc;
    assign sa = shift_en ? act : '0;
    assign sc = shift_en ? wfield[Q-1:0] : '0;
    strum_barrel_shifter #(.L(L), .Q(Q)) u_bs (.act(sa), .code(sc), .prod(shift_p));
  end else begin : g_no_shift
    assign shift_p = '0;
  end

  assign prod = shift_en ? shift_p : (mult_en ? mult_p : '0);
endmodule
