// strum_pe: StruM processing element (one PE of the 16x16 array).
//
// The PE computes 16-input-channel dot products of INT8 activations with
// StruM-compressed weights and accumulates them into its output register
// file. It holds
//   - the IF data RF, 4 lines of 16 INT8 activations (one per input channel),
//   - the FL data RF, 4 lines holding a compressed weight payload each, and
//     the FL bitmap RF, 4 x 16-bit precision masks (the FlexNN sparsity
//     bitmap RF reused as precision bitmap),
//   - the OF RF, 16 x 32-bit partial sums,
//   - 8 MAC lanes, a find-first precision selector, an adder tree and the
//     command sequencer (the PE's control logic),
//   - in the configurable variant, the barrel shifter enable register.
//
// A command (pe_cmd_t) names an IF line, an FL line and an OF entry. While it
// runs, the FL line is decoded (strum_weight_decoder), and each cycle the
// selector hands the first pending INT8 weights to the multiplier lanes and
// the first pending power-of-two weights to the shifter lanes. The lane
// products are summed and added to the OF entry (to zero on the first cycle
// when clear is set). The command ends in the cycle its last element retires.
// Cycles per command = max(ceil(#int8 / #mult lanes), ceil(#pow2 / #shift
// lanes)): 2 for a p = 0.5 block on the 4+4 PE, 4 for a dense INT8 block.
//
// Timing: cmd_ready is high when idle or in the last cycle of a command, so
// back-to-back commands run without a bubble. done pulses in a command's last
// cycle; the OF entry holds the new sum from the next cycle. RF writes take
// effect at the clock edge; the OF RF has a combinational read port for the
// drain. Writing an IF/FL line that a running command uses is not allowed.
// Synchronous active-low reset clears the OF RF, the sequencer and the enable
// register; the IF and FL RFs are not reset.
//
// Variants (parameters): CONFIGURABLE = 0 is the statically configured PE of
// Fig. 8(c): lanes with SHIFT_LANES bit set have only a barrel shifter, the
// others only an INT8 multiplier (default 4 + 4). CONFIGURABLE = 1 is the
// quality-configurable PE of Fig. 9: every lane has both units and the
// barrel shifter enable register (reset value SHIFT_LANES, written through
// cfg_we) picks each lane's role before a layer runs.
//
// From the paper: RF sizes, 8 lanes, 4 of 8 replaced by shifters, the
// adder tree and OF accumulation, the enable register and its inverted
// multiplier enable, the 2-cycle INT8 fallback. This design's choices: the
// command interface, the cycle-level find-first schedule over the full
// 16-element block, reset behaviour and widths.
module strum_pe
  import strum_pkg::*;
#(
  parameter bit          CONFIGURABLE = 1'b0,
  parameter lanes_t      SHIFT_LANES  = 8'hF0, // lanes 4..7 are shifters
  parameter int unsigned L            = 7,
  parameter int unsigned Q            = q_bits(L)
) (
  input  logic             clk,
  input  logic             rst_n,
  // IF (activation) RF write
  input  logic             if_we,
  input  logic [IF_AW-1:0] if_waddr,
  input  line_t            if_wdata,
  // FL (weight) RF write: compressed payload and its precision mask
  input  logic             fl_we,
  input  logic [FL_AW-1:0] fl_waddr,
  input  line_t            fl_wdata,
  input  mask_t            fl_wmask,
  // barrel shifter enable configuration register (configurable variant)
  input  logic             cfg_we,
  input  lanes_t           cfg_wdata,
  // commands
  input  logic             cmd_valid,
  output logic             cmd_ready,
  input  pe_cmd_t          cmd,
  output logic             idle,        // no command in progress
  output logic             done,
  output logic             orphan,      // a block had elements with no lane of their kind
  // OF RF read (drain)
  input  logic [OF_AW-1:0] of_raddr,
  output acc_t             of_rdata,
  // lane activity this cycle (for power/utilisation accounting)
  output lanes_t           lane_busy
);
  line_t  if_rf   [IF_ENTRIES];
  line_t  fl_rf   [FL_ENTRIES];
  mask_t  flbm_rf [FL_ENTRIES];
  acc_t   of_rf   [OF_ENTRIES];
  lanes_t bs_en;

  logic    busy, first;
  pe_cmd_t cur;
  mask_t   pending;

  // ---------------- register files ----------------
  always_ff @(posedge clk) begin
    if (if_we) if_rf[if_waddr] <= if_wdata;
    if (fl_we) begin
      fl_rf[fl_waddr]   <= fl_wdata;
      flbm_rf[fl_waddr] <= fl_wmask;
    end
  end

  if (CONFIGURABLE) begin : g_cfg
    always_ff @(posedge clk) begin
      if (!rst_n)      bs_en <= SHIFT_LANES;
      else if (cfg_we) bs_en <= cfg_wdata;
    end
  end else begin : g_static
    assign bs_en = SHIFT_LANES;
  end

  // ---------------- datapath ----------------
  line_t            cur_if, cur_fl;
  mask_t            cur_mask;
  wbyte_t [BLK-1:0] wfield;
  logic [POS_W-1:0] used_bits;
  lanes_t           lane_valid;
  logic [LANES-1:0][IDX_W-1:0] lane_idx;
  mask_t            taken;
  logic [LANES-1:0][PROD_W-1:0] prods;
  localparam int unsigned SUM_W = PROD_W + $clog2(LANES);
  logic signed [SUM_W-1:0] dot;
  acc_t acc_base;

  assign cur_if   = if_rf[cur.if_idx];
  assign cur_fl   = fl_rf[cur.fl_idx];
  assign cur_mask = flbm_rf[cur.fl_idx];

  strum_weight_decoder #(.Q(Q)) u_dec (
    .mask(cur_mask), .payload(cur_fl), .wfield(wfield), .used_bits(used_bits)
  );

  strum_precision_select u_sel (
    .pending(busy ? pending : '0), .mask(cur_mask), .lane_shift(bs_en),
    .lane_valid(lane_valid), .lane_idx(lane_idx), .taken(taken), .orphan(orphan)
  );

  for (genvar j = 0; j < int'(LANES); j++) begin : g_lane
    act_t  a;
    prod_t p;
    assign a = act_t'(cur_if[8*lane_idx[j] +: 8]);
    strum_mac_lane #(
      .HAS_MULT (CONFIGURABLE || !SHIFT_LANES[j]),
      .HAS_SHIFT(CONFIGURABLE ||  SHIFT_LANES[j]),
      .L(L), .Q(Q)
    ) u_lane (
      .valid(lane_valid[j]), .use_shift(bs_en[j]), .act(a),
      .wfield(wfield[lane_idx[j]]), .prod(p)
    );
    assign prods[j] = p;
  end

  strum_adder_tree #(.N(LANES), .IW(PROD_W), .OW(SUM_W)) u_tree (.in(prods), .sum(dot));

  assign acc_base  = (first && cur.clear) ? '0 : of_rf[cur.of_idx];
  assign lane_busy = lane_valid;

  // ---------------- sequencer ----------------
  logic last;
  assign last      = busy && ((pending & ~taken) == '0);
  assign done      = last;
  assign cmd_ready = !busy || last;
  assign idle      = !busy;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      first   <= 1'b0;
      pending <= '0;
      cur     <= '0;
    end else begin
      if (cmd_valid && cmd_ready) begin
        busy    <= 1'b1;
        first   <= 1'b1;
        pending <= '1;
        cur     <= cmd;
      end else if (busy) begin
        busy    <= !last;
        first   <= 1'b0;
        pending <= pending & ~taken;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int e = 0; e < int'(OF_ENTRIES); e++) of_rf[e] <= '0;
    end else if (busy) begin
      of_rf[cur.of_idx] <= acc_base + acc_t'(dot);
    end
  end

  assign of_rdata = of_rf[of_raddr];

  // a power-of-two element with a mult-only configuration and vice versa
  // loses its product: flag it in simulation
  always_ff @(posedge clk) begin
    if (rst_n && busy) assert (!orphan)
      else $warning("strum_pe: block has elements with no lane of their kind");
  end

  // The decoded payload must fit the 16 B line (it always does: at most 16 x 8 bits).
  always_comb assert (used_bits <= POS_W'(LINE_W));
endmodule
