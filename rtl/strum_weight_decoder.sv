// strum_weight_decoder: unpacks one compressed StruM weight block.
//
// A compressed block is a mask header and a payload. Header bit i tells
// whether element i is a high-precision INT8 weight (1) or a low-precision
// q-bit power-of-two code (0). The payload holds the elements back to back in
// element order, element 0 in the least significant bits, 8 bits for a
// high-precision element and q bits for a low-precision one. The bit offset
// of element i is therefore the sum of the widths of elements 0..i-1, a
// prefix sum over the mask; each element is then cut out of the payload at
// its offset. With p = 0.5 and q = 4 a [1,16] block needs 16 header bits and
// 96 payload bits, 7/8 of the 128 bits of an uncompressed block.
//
// Outputs: wfield[i] is element i (an INT8 weight, or the code zero-extended
// to 8 bits) and used_bits the payload length. Combinational.
//
// From the paper: the mask header, its 1/0 meaning, and that the mask bit
// selects how many payload bits are read for each element (Fig. 5, Sec.
// IV-D). This design's choice: the element order and bit order inside the
// payload.
module strum_weight_decoder
  import strum_pkg::*;
#(
  parameter int unsigned Q = 4   // low-precision code width
) (
  input  mask_t                mask,
  input  line_t                payload,
  output wbyte_t [BLK-1:0]     wfield,
  output logic [POS_W-1:0]     used_bits
);
  always_comb begin
    logic [POS_W-1:0] off;
    line_t            sh;
    off = '0;
    for (int i = 0; i < int'(BLK); i++) begin
      sh = payload >> off;
      if (mask[i]) wfield[i] = sh[7:0];
      else         wfield[i] = wbyte_t'(sh[Q-1:0]);
      off = off + (mask[i] ? POS_W'(HP_BITS) : POS_W'(Q));
    end
    used_bits = off;
  end
endmodule
