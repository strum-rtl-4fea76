// strum_tb_pkg: reference models shared by the StruM testbenches.
//
// Encodes weight blocks the way a compiler would (mask header plus packed
// payload, element 0 at the least significant bit, 8 bits per INT8 weight
// and q bits per power-of-two code) and computes expected products and dot
// products with plain integer arithmetic, independently of the RTL.
package strum_tb_pkg;
  import strum_pkg::*;

  // One uncompressed block: per element a mask bit and its value field
  // (INT8 weight when high, {sign, shift} code when low).
  typedef struct {
    logic [BLK-1:0] mask;
    int             field [BLK];
  } blk_t;

  // Weight value of a power-of-two code with shift saturated at l.
  function automatic int pow2_weight(int code, int q, int l);
    int k, s;
    s = (code >> (q - 1)) & 1;
    k = code & ((1 << (q - 1)) - 1);
    if (k > l) k = l;
    return s ? -(1 << k) : (1 << k);
  endfunction

  function automatic int weight_of(blk_t b, int i, int q, int l);
    if (b.mask[i]) return (b.field[i] >= 128) ? b.field[i] - 256 : b.field[i];
    return pow2_weight(b.field[i], q, l);
  endfunction

  // Random mask with exactly nhigh ones.
  function automatic logic [BLK-1:0] rand_mask(int nhigh);
    logic [BLK-1:0] m;
    int n, i;
    m = '0; n = 0;
    while (n < nhigh) begin
      i = $urandom_range(BLK - 1);
      if (!m[i]) begin m[i] = 1'b1; n++; end
    end
    return m;
  endfunction

  function automatic blk_t rand_block(int nhigh, int q);
    blk_t b;
    b.mask = rand_mask(nhigh);
    for (int i = 0; i < BLK; i++)
      b.field[i] = b.mask[i] ? $urandom_range(255) : $urandom_range((1 << q) - 1);
    return b;
  endfunction

  function automatic line_t encode(blk_t b, int q);
    line_t p;
    int pos;
    p = '0; pos = 0;
    for (int i = 0; i < BLK; i++) begin
      int w;
      w = b.mask[i] ? 8 : q;
      for (int k = 0; k < w; k++) p[pos + k] = (b.field[i] >> k) & 1;
      pos += w;
    end
    return p;
  endfunction

  function automatic int payload_bits(logic [BLK-1:0] m, int q);
    int n;
    n = 0;
    for (int i = 0; i < BLK; i++) n += m[i] ? 8 : q;
    return n;
  endfunction

  function automatic line_t rand_acts();
    line_t a;
    for (int i = 0; i < BLK; i++) a[8*i +: 8] = 8'($urandom_range(255));
    return a;
  endfunction

  function automatic int act_of(line_t a, int i);
    return int'($signed(a[8*i +: 8]));
  endfunction

  function automatic int dot(line_t a, blk_t b, int q, int l);
    int s;
    s = 0;
    for (int i = 0; i < BLK; i++) s += act_of(a, i) * weight_of(b, i, q, l);
    return s;
  endfunction

  function automatic int ceil_div(int a, int b);
    return (a + b - 1) / b;
  endfunction

  // Cycles a PE with nmul multiplier lanes and nsh shifter lanes spends on
  // one block with nhigh INT8 elements.
  function automatic int pe_cycles(int nhigh, int nmul, int nsh);
    int a, c;
    a = (nmul > 0) ? ceil_div(nhigh, nmul) : 0;
    c = (nsh > 0) ? ceil_div(BLK - nhigh, nsh) : 0;
    return (a > c) ? ((a > 0) ? a : 1) : ((c > 0) ? c : 1);
  endfunction
endpackage
