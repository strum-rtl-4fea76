// strum_pkg: sizes and types shared by the StruM DPU.
//
// StruM (structured mixed precision) splits every weight block of [1,16]
// input channels into a fixed number of 8-bit integer weights and a fixed
// number of power-of-two weights. The compressed block is a 16-bit mask
// header (1 = 8-bit integer, 0 = power of two) followed by a packed payload.
// The PE routes integer weights to INT8 multipliers and power-of-two weights
// to barrel shifters.
//
// The sizes below follow the evaluated configuration: a 16x16 PE array, 8 MAC
// lanes per PE, a [1,16] weight block, 4x16 B activation (IF) and weight (FL)
// register files, a 4x2 B weight bitmap register file and a 16x4 B output
// (OF) register file. The 16-bit product width and the 32-bit accumulator
// (taken from the 4 B OF entries) and the PE command layout are this design's
// own choices.
package strum_pkg;

  localparam int unsigned BLK        = 16; // weight block width w, [l,w] = [1,16]
  localparam int unsigned LANES      = 8;  // MAC lanes per PE
  localparam int unsigned HP_BITS    = 8;  // high-precision (integer) weight width
  localparam int unsigned IF_ENTRIES = 4;  // IF data RF: 4 x 16 B
  localparam int unsigned FL_ENTRIES = 4;  // FL data RF: 4 x 16 B (+ 4 x 2 B bitmap RF)
  localparam int unsigned OF_ENTRIES = 16; // OF RF: 16 x 4 B
  localparam int unsigned PROD_W     = 16; // one lane's product
  localparam int unsigned ACC_W      = 32; // one OF RF entry (4 B)

  localparam int unsigned IDX_W    = $clog2(BLK);
  localparam int unsigned IF_AW    = $clog2(IF_ENTRIES);
  localparam int unsigned FL_AW    = $clog2(FL_ENTRIES);
  localparam int unsigned OF_AW    = $clog2(OF_ENTRIES);
  localparam int unsigned LINE_W   = BLK * 8; // one 16 B RF line
  localparam int unsigned POS_W    = $clog2(LINE_W + 1);

  typedef logic signed [7:0]        act_t;   // INT8 activation
  typedef logic [7:0]               wbyte_t; // decoded weight field
  typedef logic signed [PROD_W-1:0] prod_t;
  typedef logic signed [ACC_W-1:0]  acc_t;
  typedef logic [LINE_W-1:0]        line_t;  // one RF line, element i in bits [8i+7:8i]
  typedef logic [BLK-1:0]           mask_t;  // precision bitmap, bit i = element i
  typedef logic [LANES-1:0]         lanes_t; // one bit per MAC lane

  // One PE command: dot product of IF line if_idx with FL line fl_idx
  // (16 input channels), accumulated into OF entry of_idx. clear starts the
  // accumulation from zero instead of the stored partial sum.
  typedef struct packed {
    logic [IF_AW-1:0] if_idx;
    logic [FL_AW-1:0] fl_idx;
    logic [OF_AW-1:0] of_idx;
    logic             clear;
  } pe_cmd_t;

  // Number of payload bits of a power-of-two weight: q = ceil(log2(L+1)) + 1.
  function automatic int unsigned q_bits(input int unsigned l);
    return $clog2(l + 1) + 1;
  endfunction

endpackage
