// tb_strum_dpu_layer: runs a convolution layer tile on the full-size DPU
// (default parameters) with weights encoded by MIP2Q at the three shares of
// power-of-two weights used in the accuracy study: p = 0.25, 0.5 and 0.75.
//
// Layer tile: a 1x1 convolution with 64 input channels and 32 output
// channels (two passes of 16 columns), 16 output pixels per pass, as in the
// 64-channel 1x1 layers of a ResNet-50 bottleneck. Weights are random INT8
// values with a bell-shaped distribution. MIP2Q encoding: every weight is
// rounded to its nearest signed power of two (shift 0..L); because the L2
// error of a block is a sum over its elements, the best split with a fixed
// number of INT8 weights keeps exactly the (1-p)*16 weights whose rounding
// error is largest and turns the rest into powers of two.
//
// Checked: every output against an integer model of the encoded weights,
// and the cycles per 16-channel block on the static 4 + 4 PE: 3 at p = 0.25
// (12 INT8 on 4 multipliers), 2 at p = 0.5, 3 at p = 0.75 (12 powers of two
// on 4 shifters). The mean relative error against pure INT8 weights is
// printed for information.
module tb_strum_dpu_layer;
  import strum_pkg::*;
  import strum_tb_pkg::*;

  localparam int ROWS = 16, COLS = 16, NB = 4, LMAX = 7, PASSES = 2;
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
  logic [3:0]       out_row [COLS];
  logic [31:0]      cmd_count, busy_cycles, stall_cycles, mult_ops, shift_ops;

  strum_dpu dut (.clk, .rst_n, .if_we, .if_waddr, .if_wdata, .fl_we, .fl_waddr, .fl_wdata, .fl_wmask,
    .cfg_we, .cfg_wdata, .cmd_valid, .cmd_ready, .cmd, .idle, .orphan, .drain_start, .drain_of_idx,
    .drain_ready, .out_valid, .out_ready, .out_data, .out_row, .cmd_count, .busy_cycles,
    .stall_cycles, .mult_ops, .shift_ops);

  int checks = 0, failures = 0;

  task automatic check(int got, int exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 15) $display("%0t %s: got %0d exp %0d", $time, what, got, exp);
    end
  endtask

  // bell-shaped INT8 weight: sum of four uniform values
  function automatic int rand_weight();
    int s = 0;
    for (int k = 0; k < 4; k++) s += $urandom_range(64) - 32;
    return (s > 127) ? 127 : ((s < -128) ? -128 : s);
  endfunction

  // nearest signed power of two with shift 0..LMAX, as a {sign, shift} code
  function automatic int nearest_pow2_code(int w);
    int best_k, best_e, e, mag;
    mag = (w < 0) ? -w : w;
    best_k = 0; best_e = 1 << 30;
    for (int k = 0; k <= LMAX; k++) begin
      e = mag - (1 << k);
      if (e < 0) e = -e;
      if (e < best_e) begin best_e = e; best_k = k; end
    end
    return ((w < 0) ? 8 : 0) + best_k;
  endfunction

  // MIP2Q: keep the nhigh weights with the largest power-of-two error
  function automatic blk_t mip2q(int w [BLK], int nhigh);
    blk_t b;
    int err [BLK];
    b.mask = '0;
    for (int i = 0; i < BLK; i++) begin
      int d;
      d = w[i] - pow2_weight(nearest_pow2_code(w[i]), 4, LMAX);
      err[i] = d * d;
    end
    for (int n = 0; n < nhigh; n++) begin
      int bi, be;
      bi = -1; be = -1;
      for (int i = 0; i < BLK; i++) if (!b.mask[i] && err[i] > be) begin be = err[i]; bi = i; end
      b.mask[bi] = 1'b1;
    end
    for (int i = 0; i < BLK; i++) b.field[i] = b.mask[i] ? (w[i] & 255) : nearest_pow2_code(w[i]);
    return b;
  endfunction

  task automatic run_layer(int nhigh, int exp_cyc);
    line_t acts [ROWS][NB];
    int    raw  [COLS][NB][BLK];
    blk_t  blks [COLS][NB];
    int    expv [ROWS][COLS];
    real   err_sum, ref_sum;
    err_sum = 0; ref_sum = 0;
    for (int b = 0; b < NB; b++) begin
      @(negedge clk); if_we = '1; if_waddr = IF_AW'(b);
      for (int r = 0; r < ROWS; r++) begin
        for (int i = 0; i < BLK; i++) acts[r][b][8*i +: 8] = 8'($urandom_range(127)); // post-ReLU
        if_wdata[r] = acts[r][b];
      end
    end
    @(negedge clk); if_we = '0;
    for (int pass = 0; pass < PASSES; pass++) begin
      int b0, k;
      for (int b = 0; b < NB; b++) begin
        @(negedge clk); fl_we = '1; fl_waddr = FL_AW'(b);
        for (int c = 0; c < COLS; c++) begin
          int w [BLK];
          for (int i = 0; i < BLK; i++) begin w[i] = rand_weight(); raw[c][b][i] = w[i]; end
          blks[c][b] = mip2q(w, nhigh);
          fl_wdata[c] = encode(blks[c][b], 4); fl_wmask[c] = blks[c][b].mask;
        end
      end
      @(negedge clk); fl_we = '0;
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < COLS; c++) begin
          int exact;
          expv[r][c] = 0; exact = 0;
          for (int b = 0; b < NB; b++) begin
            expv[r][c] += dot(acts[r][b], blks[c][b], 4, LMAX);
            for (int i = 0; i < BLK; i++) exact += act_of(acts[r][b], i) * raw[c][b][i];
          end
          err_sum += (expv[r][c] > exact) ? expv[r][c] - exact : exact - expv[r][c];
          ref_sum += (exact < 0) ? -exact : exact;
        end
      b0 = busy_cycles; k = 0;
      cmd_valid = 1; cmd.if_idx = 0; cmd.fl_idx = 0; cmd.of_idx = OF_AW'(pass); cmd.clear = 1;
      while (k < NB) begin
        @(posedge clk);
        if (cmd_ready) begin k++; #1; cmd.if_idx = IF_AW'(k); cmd.fl_idx = FL_AW'(k); cmd.clear = 0; end
      end
      @(negedge clk); cmd_valid = 0;
      wait (idle);
      @(negedge clk);
      check(busy_cycles - b0, NB * exp_cyc, $sformatf("%0d INT8 per block: cycles", nhigh));
      @(negedge clk); drain_start = 1; drain_of_idx = OF_AW'(pass);
      @(negedge clk); drain_start = 0;
      begin
        int got [COLS];
        for (int c = 0; c < COLS; c++) got[c] = 0;
        repeat (ROWS + 4) begin
          @(posedge clk);
          for (int c = 0; c < COLS; c++) if (out_valid[c]) begin
            check(int'(out_data[c]), expv[out_row[c]][c], $sformatf("p-share %0d out r%0d c%0d", nhigh, out_row[c], c));
            got[c]++;
          end
        end
        for (int c = 0; c < COLS; c++) check(got[c], ROWS, "values drained");
      end
    end
    $display("%0d INT8 + %0d power-of-two weights per block: %0d cycles per block, mean relative output error vs INT8 %0.4f",
             nhigh, BLK - nhigh, exp_cyc, err_sum / ref_sum);
  endtask

  initial begin
    for (int r = 0; r < ROWS; r++) if_wdata[r] = '0;
    for (int c = 0; c < COLS; c++) begin fl_wdata[c] = '0; fl_wmask[c] = '0; end
    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1;
    run_layer(12, 3);  // p = 0.25
    run_layer(8, 2);   // p = 0.5
    run_layer(4, 3);   // p = 0.75
    check(int'(orphan), 0, "no orphan");
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
