// tb_strum_pe: checks a statically configured PE (4 INT8 multipliers + 4
// barrel shifters, L = 7) and a quality-configurable PE (8 lanes with both
// units, L = 5) side by side. Both get the same RF writes and commands.
//
// Checked: OF results against an integer model (clear and accumulate, all
// IF/FL/OF addresses), cycles per command (2 for a p = 0.5 block, 4 for a
// dense INT8 block on the static PE; on the configurable PE 2 for Config. 1,
// Config. 2 with a 4 INT8 / 12 power-of-two block, and all-multiplier mode
// with a dense block), back-to-back issue at one block per 2 cycles, shift
// saturation at L = 5, and the orphan flag when the configuration has no
// lane for some elements.
module tb_strum_pe;
  import strum_pkg::*;
  import strum_tb_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic             if_we = 0, fl_we = 0, cfg_we = 0, cmd_valid = 0;
  logic [IF_AW-1:0] if_waddr = 0;
  logic [FL_AW-1:0] fl_waddr = 0;
  line_t            if_wdata = '0, fl_wdata = '0;
  mask_t            fl_wmask = '0;
  lanes_t           cfg_wdata = '0;
  pe_cmd_t          cmd = '0;
  logic [OF_AW-1:0] of_raddr = 0;

  logic   rdy_s, rdy_c, idle_s, idle_c, done_s, done_c, orph_s, orph_c, go;
  acc_t   rd_s, rd_c;
  lanes_t lb_s, lb_c;

  assign go = cmd_valid && rdy_s && rdy_c;

  strum_pe #(.CONFIGURABLE(0), .SHIFT_LANES(8'hF0), .L(7)) dut_s (
    .clk, .rst_n, .if_we, .if_waddr, .if_wdata, .fl_we, .fl_waddr, .fl_wdata, .fl_wmask,
    .cfg_we, .cfg_wdata, .cmd_valid(go), .cmd_ready(rdy_s), .cmd, .idle(idle_s), .done(done_s),
    .orphan(orph_s), .of_raddr, .of_rdata(rd_s), .lane_busy(lb_s));
  strum_pe #(.CONFIGURABLE(1), .SHIFT_LANES(8'hF0), .L(5)) dut_c (
    .clk, .rst_n, .if_we, .if_waddr, .if_wdata, .fl_we, .fl_waddr, .fl_wdata, .fl_wmask,
    .cfg_we, .cfg_wdata, .cmd_valid(go), .cmd_ready(rdy_c), .cmd, .idle(idle_c), .done(done_c),
    .orphan(orph_c), .of_raddr, .of_rdata(rd_c), .lane_busy(lb_c));

  int checks = 0, failures = 0;
  int busy_s = 0, busy_c = 0, orphan_seen = 0;
  line_t  acts [IF_ENTRIES];
  blk_t   blks [FL_ENTRIES];
  int     exp_s [OF_ENTRIES], exp_c [OF_ENTRIES];
  lanes_t roles_c = 8'hF0;

  always @(posedge clk) begin
    if (!idle_s) busy_s++;
    if (!idle_c) busy_c++;
    if (orph_c && !idle_c) orphan_seen++;
  end

  task automatic check(int got, int exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 15) $display("%0t %s: got %0d exp %0d", $time, what, got, exp);
    end
  endtask

  function automatic int count_ones8(lanes_t v);
    int n = 0;
    for (int j = 0; j < LANES; j++) n += v[j];
    return n;
  endfunction

  // dot product as the configurable PE computes it: elements with no lane
  // of their kind contribute nothing
  function automatic int dot_roles(line_t a, blk_t b, int l, lanes_t roles);
    int s, nm, ns;
    s = 0; ns = count_ones8(roles); nm = LANES - ns;
    for (int i = 0; i < BLK; i++) begin
      if (b.mask[i] && nm == 0) continue;
      if (!b.mask[i] && ns == 0) continue;
      s += act_of(a, i) * weight_of(b, i, 4, l);
    end
    return s;
  endfunction

  function automatic int nhigh_of(blk_t b);
    int n = 0;
    for (int i = 0; i < BLK; i++) n += b.mask[i];
    return n;
  endfunction

  task automatic write_if(int a, line_t d);
    @(negedge clk); if_we = 1; if_waddr = IF_AW'(a); if_wdata = d; acts[a] = d;
    @(negedge clk); if_we = 0;
  endtask

  task automatic write_fl(int a, blk_t b);
    @(negedge clk); fl_we = 1; fl_waddr = FL_AW'(a); fl_wdata = encode(b, 4); fl_wmask = b.mask; blks[a] = b;
    @(negedge clk); fl_we = 0;
  endtask

  task automatic write_cfg(lanes_t v);
    @(negedge clk); cfg_we = 1; cfg_wdata = v; roles_c = v;
    @(negedge clk); cfg_we = 0;
  endtask

  task automatic model(pe_cmd_t c);
    int ds, dc;
    ds = dot_roles(acts[c.if_idx], blks[c.fl_idx], 7, 8'hF0);
    dc = dot_roles(acts[c.if_idx], blks[c.fl_idx], 5, roles_c);
    exp_s[c.of_idx] = (c.clear ? 0 : exp_s[c.of_idx]) + ds;
    exp_c[c.of_idx] = (c.clear ? 0 : exp_c[c.of_idx]) + dc;
  endtask

  // one command, then wait for both PEs; check the cycles each spent
  task automatic run_one(pe_cmd_t c, int cyc_s, int cyc_c);
    int b0s, b0c;
    wait (idle_s && idle_c);
    @(negedge clk);
    b0s = busy_s; b0c = busy_c;
    cmd_valid = 1; cmd = c;
    @(negedge clk); cmd_valid = 0;
    wait (idle_s && idle_c);
    @(negedge clk);
    model(c);
    if (cyc_s > 0) check(busy_s - b0s, cyc_s, "static PE cycles");
    if (cyc_c > 0) check(busy_c - b0c, cyc_c, "configurable PE cycles");
  endtask

  task automatic check_of();
    for (int e = 0; e < OF_ENTRIES; e++) begin
      @(negedge clk); of_raddr = OF_AW'(e); #1;
      check(int'(rd_s), exp_s[e], $sformatf("static OF[%0d]", e));
      check(int'(rd_c), exp_c[e], $sformatf("config OF[%0d]", e));
    end
  endtask

  function automatic pe_cmd_t mk(int i, int f, int o, bit clr);
    pe_cmd_t c;
    c.if_idx = IF_AW'(i); c.fl_idx = FL_AW'(f); c.of_idx = OF_AW'(o); c.clear = clr;
    return c;
  endfunction

  initial begin
    for (int e = 0; e < OF_ENTRIES; e++) begin exp_s[e] = 0; exp_c[e] = 0; end
    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1;

    // --- p = 0.5 blocks: 2 cycles on both PEs (Config. 1 = reset value)
    for (int i = 0; i < IF_ENTRIES; i++) write_if(i, rand_acts());
    for (int f = 0; f < FL_ENTRIES; f++) write_fl(f, rand_block(8, 4));
    for (int o = 0; o < OF_ENTRIES; o++)
      for (int f = 0; f < FL_ENTRIES; f++)
        run_one(mk($urandom_range(IF_ENTRIES-1), f, o, f == 0), 2, 2);
    check_of();

    // --- dense INT8 block: static PE falls back to 4 cycles
    write_fl(1, rand_block(16, 4));
    run_one(mk(0, 1, 3, 1), 4, 4);
    run_one(mk(2, 1, 3, 0), 4, 4);
    // --- all-multiplier configuration: dense block in 2 cycles
    write_cfg(8'h00);
    run_one(mk(1, 1, 4, 1), 4, 2);
    // power-of-two elements with no shifter lane: flagged and dropped
    write_fl(2, rand_block(8, 4));
    orphan_seen = 0;
    run_one(mk(1, 2, 5, 1), 2, 1);
    check(orphan_seen > 0, 1, "orphan flag");
    // --- Config. 2 of Fig. 9: 2 multipliers, 6 shifters (0 0 1 1 1 1 1 1)
    write_cfg(8'hFC);
    write_fl(3, rand_block(4, 4));
    run_one(mk(3, 3, 6, 1), 3, 2);   // static: max(ceil(4/4), ceil(12/4)) = 3
    run_one(mk(0, 3, 6, 0), 3, 2);
    check_of();

    // --- back-to-back p = 0.5 commands, Config. 1: one block per 2 cycles
    write_cfg(8'hF0);
    for (int f = 0; f < FL_ENTRIES; f++) write_fl(f, rand_block(8, 4));
    begin
      int b0, n, t0;
      wait (idle_s && idle_c);
      @(negedge clk);
      b0 = busy_s; n = 0;
      cmd_valid = 1;
      cmd = mk(0, 0, 7, 1);
      while (n < 12) begin
        @(posedge clk);
        if (go) begin
          model(cmd);
          n++;
          #1 cmd = mk(n % IF_ENTRIES, n % FL_ENTRIES, 7 + (n / 4), (n % 4) == 0);
        end
      end
      @(negedge clk); cmd_valid = 0;
      wait (idle_s && idle_c);
      @(negedge clk);
      check(busy_s - b0, 24, "12 back-to-back p=0.5 commands in 24 cycles");
    end
    check_of();

    // --- saturation: codes with shift 6/7 on the L = 5 PE
    begin
      blk_t b;
      b = rand_block(8, 4);
      for (int i = 0; i < BLK; i++) if (!b.mask[i]) b.field[i] = 6 + (i & 1) + 8 * (i & 2) / 2;
      write_fl(0, b);
      run_one(mk(1, 0, 15, 1), 2, 2);
    end
    check_of();

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
