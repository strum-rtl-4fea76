// strum_column_buffer: drains one PE column's results.
//
// On drain_start the buffer walks the column's PEs from row 0 to row
// ROWS-1, reading OF entry drain_of_idx of each over the column's OF data
// bus, one row per cycle, and queues the values in a FIFO of DEPTH entries.
// The FIFO is emptied through a valid/ready port towards the central drain;
// when it is full the walk pauses. drain_ready is high when no walk is in
// progress. Each output carries the row it came from.
//
// Timing: drain_start is sampled at a clock edge; rows are read at the next
// ROWS edges, one per edge, and each value is at the FIFO output one cycle
// after it is read, so the first value is offered two cycles after
// drain_start and drain_ready returns ROWS + 1 cycles after it when the
// consumer is ready. Synchronous active-low reset.
//
// From the paper: one column buffer per column at the bottom of the PE
// column, through which OF data leaves the array (Fig. 8(a), Fig. 7). The
// paper gives no insides: the walk order, FIFO and handshake are this
// design's choice.
module strum_column_buffer
  import strum_pkg::*;
#(
  parameter int unsigned ROWS  = 16,
  parameter int unsigned DEPTH = 16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    drain_start,
  input  logic [OF_AW-1:0]        drain_of_idx,
  output logic                    drain_ready,
  // OF data bus of the column
  output logic [$clog2(ROWS)-1:0] of_row,
  output logic [OF_AW-1:0]        of_raddr,
  input  acc_t                    of_rdata,
  // towards the central drain
  output logic                    out_valid,
  input  logic                    out_ready,
  output acc_t                    out_data,
  output logic [$clog2(ROWS)-1:0] out_row
);
  localparam int unsigned RW = $clog2(ROWS);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  typedef struct packed {
    logic [RW-1:0] row;
    acc_t          val;
  } entry_t;

  logic            walking;
  logic [RW-1:0]   row;
  logic [OF_AW-1:0] idx;
  entry_t          mem [DEPTH];
  logic [AW-1:0]   wp, rp;
  logic [AW:0]     cnt;
  logic            push, pop, full;

  assign full        = (cnt == (AW+1)'(DEPTH));
  assign push        = walking && !full;
  assign pop         = out_valid && out_ready;
  assign drain_ready = !walking;
  assign of_row      = row;
  assign of_raddr    = idx;
  assign out_valid   = (cnt != '0);
  assign out_data    = mem[rp].val;
  assign out_row     = mem[rp].row;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      walking <= 1'b0;
      row     <= '0;
      idx     <= '0;
    end else if (!walking) begin
      if (drain_start) begin
        walking <= 1'b1;
        row     <= '0;
        idx     <= drain_of_idx;
      end
    end else if (push) begin
      row <= row + 1'b1;
      if (row == RW'(ROWS - 1)) walking <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wp  <= '0;
      rp  <= '0;
      cnt <= '0;
    end else begin
      if (push) begin
        mem[wp] <= '{row: row, val: of_rdata};
        wp      <= (wp == AW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      end
      if (pop) rp <= (rp == AW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      cnt <= cnt + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (rst_n) assert (!(pop && cnt == '0)) else $error("strum_column_buffer: pop from empty FIFO");
  end
endmodule
