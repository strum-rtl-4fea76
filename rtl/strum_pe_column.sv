// strum_pe_column: one FlexNN column of 16 StruM PEs.
//
// All PEs of a column work on the same output channel: the column's weight
// (FL) line and precision mask are broadcast to every PE in it, while each PE
// row receives its own activations (a different IX/IY point). Because all
// PEs of a column see the same mask they take the same number of cycles per
// command and finish together. The column's OF data bus lets the column
// buffer read one PE's OF entry at a time (row select + entry address).
//
// Interface: per-row IF write enables and data, a column-wide FL write, the
// shared barrel shifter enable write, the command (already gated by the
// array), and the OF read bus. cmd_ready/idle are the AND over the rows.
// Timing is that of strum_pe; the OF read is combinational.
//
// From the paper: 16 PEs per column, weights broadcast within a column,
// one output channel per column, OF data drained through the column to its
// column buffer (Fig. 8(a), Sec. VI). This design's choice: the read-mux form
// of the OF data bus.
module strum_pe_column
  import strum_pkg::*;
#(
  parameter int unsigned ROWS         = 16,
  parameter bit          CONFIGURABLE = 1'b0,
  parameter lanes_t      SHIFT_LANES  = 8'hF0,
  parameter int unsigned L            = 7
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic [ROWS-1:0]            if_we,
  input  logic [IF_AW-1:0]           if_waddr,
  input  line_t                      if_wdata [ROWS],
  input  logic                       fl_we,
  input  logic [FL_AW-1:0]           fl_waddr,
  input  line_t                      fl_wdata,
  input  mask_t                      fl_wmask,
  input  logic                       cfg_we,
  input  lanes_t                     cfg_wdata,
  input  logic                       cmd_valid,
  output logic                       cmd_ready,
  input  pe_cmd_t                    cmd,
  output logic                       idle,
  output logic                       orphan,
  output lanes_t                     lane_busy,   // lane activity of row 0
  input  logic [$clog2(ROWS)-1:0]    of_row,
  input  logic [OF_AW-1:0]           of_raddr,
  output acc_t                       of_rdata
);
  logic [ROWS-1:0] rdy, idl, orph;
  acc_t            rd [ROWS];
  lanes_t          lb [ROWS];

  for (genvar r = 0; r < int'(ROWS); r++) begin : g_pe
    logic unused_done;
    strum_pe #(.CONFIGURABLE(CONFIGURABLE), .SHIFT_LANES(SHIFT_LANES), .L(L)) u_pe (
      .clk, .rst_n,
      .if_we(if_we[r]), .if_waddr, .if_wdata(if_wdata[r]),
      .fl_we, .fl_waddr, .fl_wdata, .fl_wmask,
      .cfg_we, .cfg_wdata,
      .cmd_valid, .cmd_ready(rdy[r]), .cmd, .idle(idl[r]),
      .done(unused_done), .orphan(orph[r]),
      .of_raddr, .of_rdata(rd[r]), .lane_busy(lb[r])
    );
  end

  assign cmd_ready = &rdy;
  assign idle      = &idl;
  assign orphan    = |orph;
  assign lane_busy = lb[0];
  assign of_rdata  = rd[of_row];
endmodule
