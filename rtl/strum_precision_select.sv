// strum_precision_select: find-first routing of block elements to MAC lanes.
//
// Each cycle the PE still has a set of pending elements of the current
// 16-element block. This unit gives the first pending high-precision elements
// (mask bit 1), in element order, to the multiplier lanes and the first
// pending low-precision elements (mask bit 0) to the shifter lanes: the n-th
// multiplier lane (counting lanes whose role is "multiply" from lane 0) takes
// the n-th pending high-precision element, and likewise for shifters. It
// reports which elements it took so the PE can retire them.
//
// With 4 multipliers and 4 shifters and a block holding exactly 8 elements of
// each kind, every block retires in exactly 2 cycles. A dense INT8 block
// (mask all ones) on the same PE takes 4 cycles, half the throughput.
//
// If no lane of one kind exists (for example every lane set to multiply
// while the block still has power-of-two elements), those elements cannot be
// computed: they are retired without a product and orphan is raised so the
// PE never hangs. Combinational.
//
// From the paper: the mask header directs weight/activation pairs to the
// INT8 multipliers (1) or the low-precision units (0) (Sec. IV-D, Fig. 6),
// and FlexNN's find-first logic "finds the first N non-zero pairs", on which
// StruM is built with the sparsity bitmap reused as precision bitmap. This
// design's choice: the rank-matching form of find-first, and the orphan rule.
module strum_precision_select
  import strum_pkg::*;
(
  input  mask_t                   pending,
  input  mask_t                   mask,
  input  lanes_t                  lane_shift, // 1 = lane is a shifter
  output lanes_t                  lane_valid,
  output logic [LANES-1:0][IDX_W-1:0] lane_idx,
  output mask_t                   taken,
  output logic                    orphan
);
  localparam int unsigned RW = $clog2(BLK + 1);

  logic [BLK-1:0][RW-1:0]   elem_rank;  // rank among pending elements of its kind
  logic [LANES-1:0][RW-1:0] lane_slot;  // rank among lanes of its kind
  logic [RW-1:0] n_mul_lanes, n_sh_lanes;

  always_comb begin
    logic [RW-1:0] hc, lc;
    hc = '0; lc = '0;
    for (int i = 0; i < int'(BLK); i++) begin
      elem_rank[i] = mask[i] ? hc : lc;
      if (pending[i] &&  mask[i]) hc = hc + 1'b1;
      if (pending[i] && !mask[i]) lc = lc + 1'b1;
    end
  end

  always_comb begin
    logic [RW-1:0] mc, sc;
    mc = '0; sc = '0;
    for (int j = 0; j < int'(LANES); j++) begin
      lane_slot[j] = lane_shift[j] ? sc : mc;
      if (lane_shift[j]) sc = sc + 1'b1;
      else               mc = mc + 1'b1;
    end
    n_mul_lanes = mc;
    n_sh_lanes  = sc;
  end

  always_comb begin
    lane_valid = '0;
    lane_idx   = '0;
    taken      = '0;
    orphan     = 1'b0;
    for (int j = 0; j < int'(LANES); j++) begin
      for (int i = 0; i < int'(BLK); i++) begin
        if (pending[i] && (mask[i] == !lane_shift[j]) && (elem_rank[i] == lane_slot[j])) begin
          lane_valid[j] = 1'b1;
          lane_idx[j]   = IDX_W'(i);
          taken[i]      = 1'b1;
        end
      end
    end
    for (int i = 0; i < int'(BLK); i++) begin
      if (pending[i] && ((mask[i] && n_mul_lanes == '0) || (!mask[i] && n_sh_lanes == '0))) begin
        taken[i] = 1'b1;
        orphan   = 1'b1;
      end
    end
  end
endmodule
