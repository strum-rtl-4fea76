// strum_barrel_shifter: the low-precision "multiplier" of a StruM PE.
//
// A power-of-two weight w = (-1)^s * 2^k is multiplied with an INT8
// activation by shifting the activation left by k places and negating the
// result when s is set. The q-bit code read from the payload is {s, k}: the
// top bit is the sign, the lower q-1 bits the shift. With L = 7 (full range,
// q = 4) k spans 0..7; with L = 5 the shifter only has to reach 5 places and
// a code above L saturates at L, matching a weight clipped to the largest
// representable power of two.
//
// The shift is built as log2 stages of 2:1 multiplexers (a barrel shifter),
// one stage per bit of the largest shift. Purely combinational.
//
// From the paper: the shifter replaces an INT8 multiplier, computes
// A x 2^B by shifting A left by B, the shift range is limited to L and
// q = ceil(log2(L+1)) + 1. This design's choice: the {sign, shift} code
// layout and saturation of codes above L.
module strum_barrel_shifter
  import strum_pkg::*;
#(
  parameter int unsigned L = 7,           // largest shift (paper variants: 7, 5)
  parameter int unsigned Q = q_bits(L)    // code width
) (
  input  act_t         act,
  input  logic [Q-1:0] code,
  output prod_t        prod
);
  localparam int unsigned SW = (L > 0) ? $clog2(L + 1) : 1; // stages

  logic         neg;
  logic [Q-2:0] k_raw;
  logic [SW-1:0] k;
  prod_t stage [SW+1];

  assign neg   = code[Q-1];
  assign k_raw = code[Q-2:0];

  // saturate the shift amount at L
  always_comb begin
    if (int'(k_raw) > int'(L)) k = SW'(L);
    else                       k = SW'(k_raw);
  end

  always_comb begin
    stage[0] = prod_t'(act); // sign extension
    for (int s = 0; s < int'(SW); s++) begin
      stage[s+1] = k[s] ? (stage[s] <<< (1 << s)) : stage[s];
    end
    prod = neg ? -stage[SW] : stage[SW];
  end
endmodule
