// tb_strum_pe_array: a 4 x 4 array (reduced from 16 x 16 to keep the run
// short). Each row gets its own activations (broadcast across columns) and
// each column its own weights. Checks all 16 PEs' OF entries against an
// integer model, that all columns with p = 0.5 blocks finish a command in 2
// cycles, and that one column holding a dense INT8 block makes the whole
// array wait for it (4 cycles per command, lock-step issue).
module tb_strum_pe_array;
  import strum_pkg::*;
  import strum_tb_pkg::*;

  localparam int ROWS = 4, COLS = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [ROWS-1:0]  if_we = '0;
  logic [IF_AW-1:0] if_waddr = 0;
  line_t            if_wdata [ROWS];
  logic [COLS-1:0]  fl_we = '0;
  logic [FL_AW-1:0] fl_waddr = 0;
  line_t            fl_wdata [COLS];
  mask_t            fl_wmask [COLS];
  logic             cfg_we = 0, cmd_valid = 0, cmd_ready, idle, orphan;
  lanes_t           cfg_wdata = '0;
  pe_cmd_t          cmd = '0;
  lanes_t           lane_busy [COLS];
  logic [1:0]       of_row [COLS];
  logic [OF_AW-1:0] of_raddr [COLS];
  acc_t             of_rdata [COLS];

  strum_pe_array #(.ROWS(ROWS), .COLS(COLS)) dut (.clk, .rst_n, .if_we, .if_waddr, .if_wdata,
    .fl_we, .fl_waddr, .fl_wdata, .fl_wmask, .cfg_we, .cfg_wdata, .cmd_valid, .cmd_ready, .cmd,
    .idle, .orphan, .lane_busy, .of_row, .of_raddr, .of_rdata);

  int checks = 0, failures = 0;
  line_t acts [ROWS][IF_ENTRIES];
  blk_t  blks [COLS][FL_ENTRIES];
  int    expv [ROWS][COLS][OF_ENTRIES];

  task automatic check(int got, int exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 15) $display("%0t %s: got %0d exp %0d", $time, what, got, exp);
    end
  endtask

  // stream n commands with cmd_valid held; return cycles from first accept
  // to the array going idle
  task automatic stream(int n, int fl, output int cycles);
    int k;
    wait (idle);
    @(negedge clk);
    cmd_valid = 1; k = 0; cycles = 0;
    cmd.if_idx = 0; cmd.fl_idx = FL_AW'(fl); cmd.of_idx = 0; cmd.clear = 1;
    while (k < n) begin
      @(posedge clk);
      cycles++;
      if (cmd_ready) begin
        for (int r = 0; r < ROWS; r++)
          for (int c = 0; c < COLS; c++)
            expv[r][c][cmd.of_idx] = (cmd.clear ? 0 : expv[r][c][cmd.of_idx]) + dot(acts[r][cmd.if_idx], blks[c][cmd.fl_idx], 4, 7);
        k++;
        #1;
        cmd.if_idx = IF_AW'(k % IF_ENTRIES); cmd.of_idx = OF_AW'(k / 2); cmd.clear = (k % 2) == 0;
      end
    end
    @(negedge clk); cmd_valid = 0;
    while (!idle) begin @(posedge clk); cycles++; #1; end
    cycles--; // the accept edge of the first command is not a busy cycle
  endtask

  task automatic check_all(int upto);
    for (int r = 0; r < ROWS; r++)
      for (int o = 0; o < upto; o++) begin
        @(negedge clk);
        for (int c = 0; c < COLS; c++) begin of_row[c] = 2'(r); of_raddr[c] = OF_AW'(o); end
        #1;
        for (int c = 0; c < COLS; c++) check(int'(of_rdata[c]), expv[r][c][o], $sformatf("PE r%0d c%0d OF[%0d]", r, c, o));
      end
  endtask

  initial begin
    int cyc;
    for (int r = 0; r < ROWS; r++) if_wdata[r] = '0;
    for (int c = 0; c < COLS; c++) begin fl_wdata[c] = '0; fl_wmask[c] = '0; of_row[c] = 0; of_raddr[c] = 0; end
    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1;
    for (int i = 0; i < IF_ENTRIES; i++) begin
      @(negedge clk); if_we = '1; if_waddr = IF_AW'(i);
      for (int r = 0; r < ROWS; r++) begin if_wdata[r] = rand_acts(); acts[r][i] = if_wdata[r]; end
    end
    @(negedge clk); if_we = '0;
    // FL line 0: p = 0.5 in every column; FL line 1: column 2 dense INT8
    for (int f = 0; f < 2; f++) begin
      @(negedge clk); fl_we = '1; fl_waddr = FL_AW'(f);
      for (int c = 0; c < COLS; c++) begin
        blks[c][f] = rand_block((f == 1 && c == 2) ? 16 : 8, 4);
        fl_wdata[c] = encode(blks[c][f], 4); fl_wmask[c] = blks[c][f].mask;
      end
    end
    @(negedge clk); fl_we = '0;

    stream(8, 0, cyc);
    check(cyc, 16, "8 p=0.5 commands in 16 cycles");
    check_all(4);
    stream(8, 1, cyc);
    check(cyc, 32, "dense column holds the array: 8 commands in 32 cycles");
    check_all(4);
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
