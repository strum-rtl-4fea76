// tb_strum_precision_select: random pending sets, masks and lane roles.
// The expected routing is built from two ordered lists: the pending INT8
// element indices and the pending power-of-two element indices; the n-th
// multiplier lane must get the n-th INT8 index and the n-th shifter lane the
// n-th power-of-two index. Also checks the retired set and the orphan flag.
module tb_strum_precision_select;
  import strum_pkg::*;

  mask_t  pending, mask, taken;
  lanes_t lane_shift, lane_valid;
  logic [LANES-1:0][IDX_W-1:0] lane_idx;
  logic   orphan;
  int checks = 0, failures = 0;

  strum_precision_select dut (.pending, .mask, .lane_shift, .lane_valid, .lane_idx, .taken, .orphan);

  task automatic fail(string s);
    failures++;
    if (failures < 10) $display("pend=%h mask=%h roles=%h: %s", pending, mask, lane_shift, s);
  endtask

  initial begin
    for (int t = 0; t < 5000; t++) begin
      int hi[$], lo[$];
      int nm, ns;
      mask_t exp_taken;
      logic exp_orphan;
      pending    = mask_t'($urandom);
      mask       = mask_t'($urandom);
      lane_shift = (t % 3 == 0) ? 8'hF0 : lanes_t'($urandom);
      if (t % 7 == 0) pending = '1;
      #1;
      hi.delete(); lo.delete();
      for (int i = 0; i < BLK; i++) if (pending[i]) begin
        if (mask[i]) hi.push_back(i); else lo.push_back(i);
      end
      nm = 0; ns = 0; exp_taken = '0;
      for (int j = 0; j < LANES; j++) begin
        int slot;
        int src[$];
        if (lane_shift[j]) begin slot = ns; ns++; src = lo; end
        else               begin slot = nm; nm++; src = hi; end
        checks++;
        if (slot < src.size()) begin
          exp_taken[src[slot]] = 1'b1;
          if (!lane_valid[j] || int'(lane_idx[j]) != src[slot]) fail($sformatf("lane %0d got v=%0b idx=%0d exp %0d", j, lane_valid[j], lane_idx[j], src[slot]));
        end else if (lane_valid[j]) fail($sformatf("lane %0d should be idle", j));
      end
      exp_orphan = 1'b0;
      if (nm == 0 && hi.size() > 0) begin exp_orphan = 1'b1; foreach (hi[k]) exp_taken[hi[k]] = 1'b1; end
      if (ns == 0 && lo.size() > 0) begin exp_orphan = 1'b1; foreach (lo[k]) exp_taken[lo[k]] = 1'b1; end
      checks += 2;
      if (taken != exp_taken) fail($sformatf("taken %h exp %h", taken, exp_taken));
      if (orphan != exp_orphan) fail("orphan");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
