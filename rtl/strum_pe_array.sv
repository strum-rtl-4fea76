// strum_pe_array: the 16 x 16 StruM PE array (16 columns of 16 PEs).
//
// Columns are split along output channels, rows along the IX/IY activation
// dimension. Each row's activation line is broadcast across all columns;
// each column has its own weight line and precision mask, so different
// columns can carry different precision patterns. A command is broadcast to
// every PE and accepted only when all PEs are ready, so the array advances in
// lock-step. With structured mixed precision every column has the same count
// of INT8 and power-of-two weights per block and no column waits on a slower
// one.
//
// Interface: per-row IF writes, per-column FL writes, a broadcast barrel
// shifter enable write, one command port (valid/ready), and one OF read bus
// per column. Timing is that of strum_pe.
//
// From the paper: 16x16 grid, activations broadcast across columns, weights
// within a column, one output channel per column (Fig. 8(a), Sec. VI). This
// design's choice: lock-step command issue.
module strum_pe_array
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
  input  logic [ROWS-1:0]            if_we,
  input  logic [IF_AW-1:0]           if_waddr,
  input  line_t                      if_wdata [ROWS],
  input  logic [COLS-1:0]            fl_we,
  input  logic [FL_AW-1:0]           fl_waddr,
  input  line_t                      fl_wdata [COLS],
  input  mask_t                      fl_wmask [COLS],
  input  logic                       cfg_we,
  input  lanes_t                     cfg_wdata,
  input  logic                       cmd_valid,
  output logic                       cmd_ready,
  input  pe_cmd_t                    cmd,
  output logic                       idle,
  output logic                       orphan,
  output lanes_t                     lane_busy [COLS],
  input  logic [$clog2(ROWS)-1:0]    of_row   [COLS],
  input  logic [OF_AW-1:0]           of_raddr [COLS],
  output acc_t                       of_rdata [COLS]
);
  logic [COLS-1:0] rdy, idl, orph;
  logic            issue;

  assign cmd_ready = &rdy;
  assign issue     = cmd_valid && cmd_ready;
  assign idle      = &idl;
  assign orphan    = |orph;

  for (genvar c = 0; c < int'(COLS); c++) begin : g_col
    strum_pe_column #(.ROWS(ROWS), .CONFIGURABLE(CONFIGURABLE), .SHIFT_LANES(SHIFT_LANES), .L(L)) u_col (
      .clk, .rst_n,
      .if_we, .if_waddr, .if_wdata,
      .fl_we(fl_we[c]), .fl_waddr, .fl_wdata(fl_wdata[c]), .fl_wmask(fl_wmask[c]),
      .cfg_we, .cfg_wdata,
      .cmd_valid(issue), .cmd_ready(rdy[c]), .cmd, .idle(idl[c]), .orphan(orph[c]),
      .lane_busy(lane_busy[c]),
      .of_row(of_row[c]), .of_raddr(of_raddr[c]), .of_rdata(of_rdata[c])
    );
  end
endmodule
