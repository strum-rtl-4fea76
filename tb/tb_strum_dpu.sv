// tb_strum_dpu: end-to-end run of the full-size StruM DPU (16 x 16 PEs,
// statically configured 4 + 4 PEs, L = 7, all parameters at their defaults).
//
// Workload: a 1x1 convolution tile with 64 input channels and 16 output
// channels (one per column). Each PE row computes one output pixel; the 64
// channels are 4 weight blocks of [1,16], so one output takes 4 commands
// (clear, then accumulate). Four phases each load 16 new pixels and store
// their outputs in a different OF entry:
//   phase 0, 1: MIP2Q weights with p = 0.5 in every column
//   phase 2:    column 5 holds dense INT8 weights (backward-compatible mode),
//               so the whole array runs at the 4-cycle rate of that column
//   phase 3:    every column dense INT8
// Then each OF entry is drained through the 16 column buffers under random
// back-pressure and all 1024 outputs are compared with an integer model.
//
// Counted and required at least once: mixed-precision commands at 2 cycles,
// dense INT8 commands at 4 cycles, a column holding up the array, a command
// stalled on cmd_ready, multiplier and shifter lane operations, accumulation
// onto a stored partial sum, and a column buffer walk paused by a full FIFO.
module tb_strum_dpu;
  import strum_pkg::*;
  import strum_tb_pkg::*;

  localparam int ROWS = 16, COLS = 16, NB = 4, PHASES = 4;
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
  logic             drain_start = 0, drain_ready;
  logic [OF_AW-1:0] drain_of_idx = 0;
  logic [COLS-1:0]  out_valid, out_ready = '0;
  acc_t             out_data [COLS];
  logic [3:0]       out_row [COLS];
  logic [31:0]      cmd_count, busy_cycles, stall_cycles, mult_ops, shift_ops;

  strum_dpu dut (.clk, .rst_n, .if_we, .if_waddr, .if_wdata, .fl_we, .fl_waddr, .fl_wdata, .fl_wmask,
    .cfg_we, .cfg_wdata, .cmd_valid, .cmd_ready, .cmd, .idle, .orphan, .drain_start, .drain_of_idx,
    .drain_ready, .out_valid, .out_ready, .out_data, .out_row, .cmd_count, .busy_cycles,
    .stall_cycles, .mult_ops, .shift_ops);

  int checks = 0, failures = 0;
  int expv [PHASES][ROWS][COLS];
  int got_n [COLS];
  int n_mixed = 0, n_dense = 0, n_slow_col = 0, n_accum = 0, n_pause = 0;

  task automatic check(int got, int exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 15) $display("%0t %s: got %0d exp %0d", $time, what, got, exp);
    end
  endtask

  task automatic run_phase(int ph);
    line_t acts [ROWS][NB];
    blk_t  blks [COLS][NB];
    int    b0, s0, k;
    // activations: 4 blocks of 16 channels for each row's pixel
    for (int b = 0; b < NB; b++) begin
      @(negedge clk); if_we = '1; if_waddr = IF_AW'(b);
      for (int r = 0; r < ROWS; r++) begin acts[r][b] = rand_acts(); if_wdata[r] = acts[r][b]; end
    end
    // weights: column c is output channel c
    for (int b = 0; b < NB; b++) begin
      @(negedge clk); fl_we = '1; fl_waddr = FL_AW'(b);
      for (int c = 0; c < COLS; c++) begin
        bit dense;
        dense = (ph == 3) || (ph == 2 && c == 5);
        blks[c][b] = rand_block(dense ? 16 : 8, 4);
        fl_wdata[c] = encode(blks[c][b], 4); fl_wmask[c] = blks[c][b].mask;
      end
    end
    @(negedge clk); if_we = '0; fl_we = '0;
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        expv[ph][r][c] = 0;
        for (int b = 0; b < NB; b++) expv[ph][r][c] += dot(acts[r][b], blks[c][b], 4, 7);
      end
    // 4 commands, valid held high
    b0 = busy_cycles; s0 = stall_cycles; k = 0;
    cmd_valid = 1; cmd.if_idx = 0; cmd.fl_idx = 0; cmd.of_idx = OF_AW'(ph); cmd.clear = 1;
    while (k < NB) begin
      @(posedge clk);
      if (cmd_ready) begin
        if (!cmd.clear) n_accum++;
        k++;
        #1; cmd.if_idx = IF_AW'(k); cmd.fl_idx = FL_AW'(k); cmd.clear = 0;
      end
    end
    @(negedge clk); cmd_valid = 0;
    wait (idle);
    @(negedge clk);
    if (ph < 2) begin
      check(busy_cycles - b0, 2 * NB, "p=0.5 phase: 2 cycles per block");
      n_mixed += NB;
    end else begin
      check(busy_cycles - b0, 4 * NB, "dense phase: 4 cycles per block");
      n_dense += NB;
      if (ph == 2) n_slow_col++;
    end
    check(int'(stall_cycles - s0) > 0, 1, "commands waited on cmd_ready");
  endtask

  // Drain OF entry pha, and if phb >= 0 start draining phb as soon as the
  // column buffers accept it. With stall set the consumer is held off for
  // the first 60 cycles, so the second walk finds the FIFOs full.
  task automatic drain(int pha, int phb, bit stall);
    int t, total;
    total = (phb >= 0) ? 2 * ROWS : ROWS;
    for (int c = 0; c < COLS; c++) got_n[c] = 0;
    wait (drain_ready && idle);
    @(negedge clk); drain_start = 1; drain_of_idx = OF_AW'(pha);
    @(negedge clk); drain_start = 0;
    fork
      if (phb >= 0) begin
        wait (drain_ready);
        @(negedge clk); drain_start = 1; drain_of_idx = OF_AW'(phb);
        @(negedge clk); drain_start = 0;
      end
    join_none
    t = 0;
    while (t < 4000) begin
      bit all;
      @(posedge clk);
      for (int c = 0; c < COLS; c++)
        if (out_valid[c] && out_ready[c]) begin
          int ph, row;
          ph  = (got_n[c] < ROWS) ? pha : phb;
          row = got_n[c] % ROWS;
          check(int'(out_row[c]), row, "row order");
          check(int'(out_data[c]), expv[ph][row][c], $sformatf("out ph%0d r%0d c%0d", ph, row, c));
          got_n[c]++;
        end
      if (dut.g_cb[0].u_cb.full && !dut.g_cb[0].u_cb.drain_ready) n_pause++;
      #1;
      out_ready = (stall && t < 60) ? '0 : COLS'($urandom);
      all = 1;
      for (int c = 0; c < COLS; c++) if (got_n[c] != total) all = 0;
      if (all) break;
      t++;
    end
    for (int c = 0; c < COLS; c++) check(got_n[c], total, "values per column");
    @(negedge clk); out_ready = '0;
  endtask

  initial begin
    int ops0;
    for (int r = 0; r < ROWS; r++) if_wdata[r] = '0;
    for (int c = 0; c < COLS; c++) begin fl_wdata[c] = '0; fl_wmask[c] = '0; end
    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1;
    for (int ph = 0; ph < PHASES; ph++) run_phase(ph);
    check(int'(cmd_count), PHASES * NB, "commands accepted");
    // lane operations of PE (0,0) (column 0): phases 0-2 8 + 8 per block,
    // phase 3 16 INT8 per block
    check(int'(shift_ops), 3 * NB * 8, "shifter operations");
    check(int'(mult_ops), 3 * NB * 8 + NB * 16, "multiplier operations");
    check(int'(orphan), 0, "no orphan elements");
    drain(0, 1, 1);
    drain(2, 3, 0);

    $display("mechanisms: mixed=%0d dense=%0d slow_column=%0d accumulate=%0d drain_pause=%0d shift_ops=%0d mult_ops=%0d",
             n_mixed, n_dense, n_slow_col, n_accum, n_pause, shift_ops, mult_ops);
    check(n_mixed > 0, 1, "mixed-precision commands ran");
    check(n_dense > 0, 1, "dense INT8 fallback ran");
    check(n_slow_col > 0, 1, "a dense column held the array");
    check(n_accum > 0, 1, "accumulation ran");
    check(n_pause > 0, 1, "column buffer paused on a full FIFO");
    check(shift_ops > 0 && mult_ops > 0, 1, "both lane kinds used");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
