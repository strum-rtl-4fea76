// tb_strum_pe_column: a 16-PE column at its default size. Each row gets its
// own activations, the column one weight line per FL entry (broadcast to all
// rows). After a set of commands every row's OF entries are read over the
// column's OF bus (row select + address) and compared with an integer
// model. Also checks that a p = 0.5 command takes 2 cycles for the whole
// column and a dense INT8 command 4.
module tb_strum_pe_column;
  import strum_pkg::*;
  import strum_tb_pkg::*;

  localparam int ROWS = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [ROWS-1:0]  if_we = '0;
  logic [IF_AW-1:0] if_waddr = 0;
  line_t            if_wdata [ROWS];
  logic             fl_we = 0, cfg_we = 0, cmd_valid = 0;
  logic [FL_AW-1:0] fl_waddr = 0;
  line_t            fl_wdata = '0;
  mask_t            fl_wmask = '0;
  lanes_t           cfg_wdata = '0;
  pe_cmd_t          cmd = '0;
  logic             cmd_ready, idle, orphan;
  lanes_t           lane_busy;
  logic [$clog2(ROWS)-1:0] of_row = 0;
  logic [OF_AW-1:0] of_raddr = 0;
  acc_t             of_rdata;

  strum_pe_column #(.ROWS(ROWS)) dut (.clk, .rst_n, .if_we, .if_waddr, .if_wdata, .fl_we, .fl_waddr,
    .fl_wdata, .fl_wmask, .cfg_we, .cfg_wdata, .cmd_valid, .cmd_ready, .cmd, .idle, .orphan,
    .lane_busy, .of_row, .of_raddr, .of_rdata);

  int checks = 0, failures = 0, busy = 0;
  line_t acts [ROWS][IF_ENTRIES];
  blk_t  blks [FL_ENTRIES];
  int    expv [ROWS][OF_ENTRIES];

  always @(posedge clk) if (!idle) busy++;

  task automatic check(int got, int exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 15) $display("%0t %s: got %0d exp %0d", $time, what, got, exp);
    end
  endtask

  task automatic run(int i, int f, int o, bit clr, int cyc);
    int b0;
    wait (idle);
    @(negedge clk);
    b0 = busy;
    cmd_valid = 1; cmd.if_idx = IF_AW'(i); cmd.fl_idx = FL_AW'(f); cmd.of_idx = OF_AW'(o); cmd.clear = clr;
    @(negedge clk); cmd_valid = 0;
    wait (idle);
    @(negedge clk);
    check(busy - b0, cyc, "column cycles");
    for (int r = 0; r < ROWS; r++)
      expv[r][o] = (clr ? 0 : expv[r][o]) + dot(acts[r][i], blks[f], 4, 7);
  endtask

  initial begin
    for (int r = 0; r < ROWS; r++) if_wdata[r] = '0;
    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1;
    for (int i = 0; i < IF_ENTRIES; i++) begin
      @(negedge clk);
      if_we = '1; if_waddr = IF_AW'(i);
      for (int r = 0; r < ROWS; r++) begin if_wdata[r] = rand_acts(); acts[r][i] = if_wdata[r]; end
    end
    @(negedge clk); if_we = '0;
    for (int f = 0; f < FL_ENTRIES; f++) begin
      blks[f] = rand_block(f == 3 ? 16 : 8, 4);
      @(negedge clk); fl_we = 1; fl_waddr = FL_AW'(f); fl_wdata = encode(blks[f], 4); fl_wmask = blks[f].mask;
    end
    @(negedge clk); fl_we = 0;
    for (int o = 0; o < 6; o++)
      for (int f = 0; f < FL_ENTRIES; f++)
        run((o + f) % IF_ENTRIES, f, o, f == 0, f == 3 ? 4 : 2);
    for (int r = 0; r < ROWS; r++)
      for (int o = 0; o < 6; o++) begin
        @(negedge clk); of_row = 4'(r); of_raddr = OF_AW'(o); #1;
        check(int'(of_rdata), expv[r][o], $sformatf("row %0d OF[%0d]", r, o));
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
