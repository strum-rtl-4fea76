// strum_dpu: StruM data processing unit: PE array plus column buffers.
//
// This is the compute tile of a FlexNN-style accelerator whose PEs run
// structured mixed precision (MIP2Q): in every [1,16] weight block a fixed
// share of weights are 8-bit integers, handled by INT8 multipliers, and the
// rest are signed powers of two, handled by barrel shifters. It has a 16 x
// 16 array of PEs (strum_pe_array) and one column buffer per column
// (strum_column_buffer). The SRAM, the tensor distribution (load) unit and
// the central drain with its post-processing engines are outside: their
// connections are this module's ports.
//
// Use:
//   1. Load activations: if_we[r] writes line if_waddr of every PE in row r
//      (16 INT8 activations, channel i in bits [8i+7:8i]).
//   2. Load weights: fl_we[c] writes, in every PE of column c, FL line
//      fl_waddr with a compressed payload and its 16-bit precision mask.
//   3. Optionally (configurable PE only) write the barrel shifter enable
//      register of all PEs with cfg_we / cfg_wdata.
//   4. Issue commands (valid/ready): each runs one 16-channel dot product in
//      every PE and accumulates into an OF entry. At p = 0.5 a command takes
//      2 cycles, with dense INT8 weights 4 (statically configured PE).
//   5. When idle is high, pulse drain_start with an OF index: every column
//      buffer reads that entry from its 16 PEs and streams the values out on
//      its out_* port.
//
// Counters: cmd_count counts accepted commands, busy_cycles the cycles in
// which any PE computed, shift_ops / mult_ops the lane operations of column
// 0, row 0, and stall_cycles the cycles in which a command waited for the
// array.
//
// From the paper: array size, column organisation, column buffers, PE
// variants. This design's choice: the port-level interfaces standing in for
// the load and drain units, the counters and the command format.
module strum_dpu
  import strum_pkg::*;
#(
  parameter int unsigned ROWS         = 16,
  parameter int unsigned COLS         = 16,
  parameter bit          CONFIGURABLE = 1'b0,
  parameter lanes_t      SHIFT_LANES  = 8'hF0,
  parameter int unsigned L            = 7
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // from the tensor distribution (load) unit
  input  logic [ROWS-1:0]            if_we,
  input  logic [IF_AW-1:0]           if_waddr,
  input  line_t                      if_wdata [ROWS],
  input  logic [COLS-1:0]            fl_we,
  input  logic [FL_AW-1:0]           fl_waddr,
  input  line_t                      fl_wdata [COLS],
  input  mask_t                      fl_wmask [COLS],
  input  logic                       cfg_we,
  input  lanes_t                     cfg_wdata,
  // commands
  input  logic                       cmd_valid,
  output logic                       cmd_ready,
  input  pe_cmd_t                    cmd,
  output logic                       idle,
  output logic                       orphan,
  // drain
  input  logic                       drain_start,
  input  logic [OF_AW-1:0]           drain_of_idx,
  output logic                       drain_ready,
  output logic [COLS-1:0]            out_valid,
  input  logic [COLS-1:0]            out_ready,
  output acc_t                       out_data [COLS],
  output logic [$clog2(ROWS)-1:0]    out_row  [COLS],
  // counters
  output logic [31:0]                cmd_count,
  output logic [31:0]                busy_cycles,
  output logic [31:0]                stall_cycles,
  output logic [31:0]                mult_ops,
  output logic [31:0]                shift_ops
);
  logic [$clog2(ROWS)-1:0] of_row   [COLS];
  logic [OF_AW-1:0]        of_raddr [COLS];
  acc_t                    of_rdata [COLS];
  lanes_t                  lane_busy [COLS];
  logic [COLS-1:0]         dr;
  lanes_t                  lane_role;

  strum_pe_array #(
    .ROWS(ROWS), .COLS(COLS), .CONFIGURABLE(CONFIGURABLE), .SHIFT_LANES(SHIFT_LANES), .L(L)
  ) u_array (
    .clk, .rst_n,
    .if_we, .if_waddr, .if_wdata,
    .fl_we, .fl_waddr, .fl_wdata, .fl_wmask,
    .cfg_we, .cfg_wdata,
    .cmd_valid, .cmd_ready, .cmd, .idle, .orphan,
    .lane_busy, .of_row, .of_raddr, .of_rdata
  );

  for (genvar c = 0; c < int'(COLS); c++) begin : g_cb
    strum_column_buffer #(.ROWS(ROWS), .DEPTH(ROWS)) u_cb (
      .clk, .rst_n,
      .drain_start(drain_start && drain_ready), .drain_of_idx, .drain_ready(dr[c]),
      .of_row(of_row[c]), .of_raddr(of_raddr[c]), .of_rdata(of_rdata[c]),
      .out_valid(out_valid[c]), .out_ready(out_ready[c]),
      .out_data(out_data[c]), .out_row(out_row[c])
    );
  end

  assign drain_ready = &dr;

  // Lane roles as seen by the PEs: a copy of the enable register kept here
  // for the counters (all PEs are written together).
  if (CONFIGURABLE) begin : g_role
    always_ff @(posedge clk) begin
      if (!rst_n)      lane_role <= SHIFT_LANES;
      else if (cfg_we) lane_role <= cfg_wdata;
    end
  end else begin : g_role_fixed
    assign lane_role = SHIFT_LANES;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cmd_count    <= '0;
      busy_cycles  <= '0;
      stall_cycles <= '0;
      mult_ops     <= '0;
      shift_ops    <= '0;
    end else begin
      if (cmd_valid && cmd_ready)  cmd_count    <= cmd_count + 1;
      if (cmd_valid && !cmd_ready) stall_cycles <= stall_cycles + 1;
      if (!idle)                   busy_cycles  <= busy_cycles + 1;
      mult_ops  <= mult_ops  + 32'($countones(lane_busy[0] & ~lane_role));
      shift_ops <= shift_ops + 32'($countones(lane_busy[0] &  lane_role));
    end
  end

  // The drain reads OF entries combinationally: it must not overlap compute.
  always_ff @(posedge clk) begin
    if (rst_n && drain_start) assert (idle) else $error("strum_dpu: drain started while the array is busy");
  end
endmodule
