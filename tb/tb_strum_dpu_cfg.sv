// tb_strum_dpu_cfg: end-to-end run of the DPU built with quality-configurable
// PEs (every lane has an INT8 multiplier and a barrel shifter) and the
// reduced shift range L = 5, on a 4 x 4 array to keep the run short.
//
// The barrel shifter enable register is reprogrammed between layers:
//   Config. 1 (0 0 0 0 1 1 1 1): 4 multipliers + 4 shifters, p = 0.5 blocks
//   Config. 2 (0 0 1 1 1 1 1 1): 2 multipliers + 6 shifters, p = 0.75 blocks
//   all multipliers (0 ... 0):   dense INT8 blocks at full rate
// Each layer must take 2 cycles per block. Power-of-two codes with shifts of
// 6 and 7 check the saturation at L = 5. Results are drained through the
// column buffers and compared with an integer model; the lane counters must
// follow the programmed roles. Each mode switch is counted.
module tb_strum_dpu_cfg;
  import strum_pkg::*;
  import strum_tb_pkg::*;

  localparam int ROWS = 4, COLS = 4, NB = 4, LMAX = 5;
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
  logic [COLS-1:0]  out_valid, out_ready = '1;
  acc_t             out_data [COLS];
  logic [1:0]       out_row [COLS];
  logic [31:0]      cmd_count, busy_cycles, stall_cycles, mult_ops, shift_ops;

  strum_dpu #(.ROWS(ROWS), .COLS(COLS), .CONFIGURABLE(1'b1), .SHIFT_LANES(8'hF0), .L(LMAX)) dut (
    .clk, .rst_n, .if_we, .if_waddr, .if_wdata, .fl_we, .fl_waddr, .fl_wdata, .fl_wmask,
    .cfg_we, .cfg_wdata, .cmd_valid, .cmd_ready, .cmd, .idle, .orphan, .drain_start, .drain_of_idx,
    .drain_ready, .out_valid, .out_ready, .out_data, .out_row, .cmd_count, .busy_cycles,
    .stall_cycles, .mult_ops, .shift_ops);

  int checks = 0, failures = 0, n_switch = 0, n_sat = 0;
  int expv [ROWS][COLS];

  task automatic check(int got, int exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 15) $display("%0t %s: got %0d exp %0d", $time, what, got, exp);
    end
  endtask

  task automatic layer(lanes_t cfg, int nhigh, int of);
    line_t acts [ROWS][NB];
    blk_t  blks [COLS][NB];
    int b0, m0, s0, k, nsh;
    @(negedge clk); cfg_we = 1; cfg_wdata = cfg;
    @(negedge clk); cfg_we = 0; n_switch++;
    nsh = $countones(cfg);
    for (int b = 0; b < NB; b++) begin
      @(negedge clk); if_we = '1; if_waddr = IF_AW'(b); fl_we = '1; fl_waddr = FL_AW'(b);
      for (int r = 0; r < ROWS; r++) begin acts[r][b] = rand_acts(); if_wdata[r] = acts[r][b]; end
      for (int c = 0; c < COLS; c++) begin
        blks[c][b] = rand_block(nhigh, 4);
        // force some shifts above L into the first column's blocks
        if (c == 0) for (int i = 0; i < BLK; i++) if (!blks[c][b].mask[i] && (i % 3 == 0)) begin
          blks[c][b].field[i] = 6 + (i & 1) + ((i & 2) ? 8 : 0);
          n_sat++;
        end
        fl_wdata[c] = encode(blks[c][b], 4); fl_wmask[c] = blks[c][b].mask;
      end
    end
    @(negedge clk); if_we = '0; fl_we = '0;
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        expv[r][c] = 0;
        for (int b = 0; b < NB; b++) expv[r][c] += dot(acts[r][b], blks[c][b], 4, LMAX);
      end
    b0 = busy_cycles; m0 = mult_ops; s0 = shift_ops; k = 0;
    cmd_valid = 1; cmd.if_idx = 0; cmd.fl_idx = 0; cmd.of_idx = OF_AW'(of); cmd.clear = 1;
    while (k < NB) begin
      @(posedge clk);
      if (cmd_ready) begin k++; #1; cmd.if_idx = IF_AW'(k); cmd.fl_idx = FL_AW'(k); cmd.clear = 0; end
    end
    @(negedge clk); cmd_valid = 0;
    wait (idle);
    @(negedge clk); @(negedge clk);
    check(busy_cycles - b0, 2 * NB, $sformatf("cfg %h: 2 cycles per block", cfg));
    check(mult_ops - m0, NB * nhigh, "multiplier operations");
    check(shift_ops - s0, NB * (BLK - nhigh), "shifter operations");
    check(int'(orphan), 0, "no orphan");
    // drain
    @(negedge clk); drain_start = 1; drain_of_idx = OF_AW'(of);
    @(negedge clk); drain_start = 0;
    begin
      int got [COLS];
      for (int c = 0; c < COLS; c++) got[c] = 0;
      repeat (ROWS + 4) begin
        @(posedge clk);
        for (int c = 0; c < COLS; c++) if (out_valid[c]) begin
          check(int'(out_data[c]), expv[out_row[c]][c], $sformatf("cfg %h out r%0d c%0d", cfg, out_row[c], c));
          got[c]++;
        end
      end
      for (int c = 0; c < COLS; c++) check(got[c], ROWS, "values drained");
    end
  endtask

  initial begin
    for (int r = 0; r < ROWS; r++) if_wdata[r] = '0;
    for (int c = 0; c < COLS; c++) begin fl_wdata[c] = '0; fl_wmask[c] = '0; end
    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1;
    layer(8'hF0, 8, 0);   // Config. 1
    layer(8'hFC, 4, 1);   // Config. 2
    layer(8'h00, 16, 2);  // back to INT8 multipliers only
    layer(8'hF0, 8, 3);   // Config. 1 again
    $display("mechanisms: mode_switches=%0d saturated_codes=%0d", n_switch, n_sat);
    check(n_switch >= 3, 1, "mode switches");
    check(n_sat > 0, 1, "shift codes above L");
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
