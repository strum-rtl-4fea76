// tb_strum_column_buffer: a 16-row column buffer with a 4-entry FIFO, so
// that the walk has to pause when the FIFO fills. The column's OF bus is
// modelled by the testbench as a function of (row, entry). Checks the order,
// rows and values of everything drained under random back-pressure, the
// drain_ready handshake, and the timing of a walk with a ready consumer
// (first value two cycles after the start, walk done 17 cycles after it).
module tb_strum_column_buffer;
  import strum_pkg::*;

  localparam int ROWS = 16, DEPTH = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic             drain_start = 0, drain_ready, out_valid, out_ready = 0;
  logic [OF_AW-1:0] drain_of_idx = 0, of_raddr;
  logic [3:0]       of_row, out_row;
  acc_t             of_rdata, out_data;

  function automatic int ofval(int r, int e);
    return r * 100003 - e * 7919 - 12345;
  endfunction
  assign of_rdata = acc_t'(ofval(int'(of_row), int'(of_raddr)));

  strum_column_buffer #(.ROWS(ROWS), .DEPTH(DEPTH)) dut (.clk, .rst_n, .drain_start, .drain_of_idx,
    .drain_ready, .of_row, .of_raddr, .of_rdata, .out_valid, .out_ready, .out_data, .out_row);

  int checks = 0, failures = 0, got_n = 0, pauses = 0;
  int exp_q [$];
  int exp_r [$];

  task automatic check(int got, int exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 15) $display("%0t %s: got %0d exp %0d", $time, what, got, exp);
    end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      check(int'(out_data), exp_q.pop_front(), "drained value");
      check(int'(out_row), exp_r.pop_front(), "drained row");
      got_n++;
    end
    if (!drain_ready && dut.full) pauses++;
  end

  task automatic start(int e);
    wait (drain_ready);
    @(negedge clk);
    drain_start = 1; drain_of_idx = OF_AW'(e);
    for (int r = 0; r < ROWS; r++) begin exp_q.push_back(ofval(r, e)); exp_r.push_back(r); end
    @(negedge clk);
    drain_start = 0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1;
    // ready consumer: timing
    out_ready = 1;
    @(negedge clk);
    drain_start = 1; drain_of_idx = 5;
    for (int r = 0; r < ROWS; r++) begin exp_q.push_back(ofval(r, 5)); exp_r.push_back(r); end
    @(negedge clk);
    drain_start = 0;
    check(int'(out_valid), 0, "no value in the start cycle");
    check(int'(drain_ready), 0, "busy while walking");
    @(negedge clk);
    check(int'(out_valid), 1, "first value two cycles after start");
    repeat (ROWS - 2) @(negedge clk);
    check(int'(drain_ready), 0, "still walking after 16 cycles");
    @(negedge clk);
    check(int'(drain_ready), 1, "walk done after 17 cycles");
    // random back-pressure over several walks
    fork
      begin
        for (int k = 0; k < 6; k++) start($urandom_range(OF_ENTRIES - 1));
      end
      begin
        repeat (600) begin
          @(negedge clk);
          out_ready = ($urandom_range(3) == 0);
        end
        out_ready = 1;
      end
    join
    repeat (40) @(negedge clk);
    check(got_n, 7 * ROWS, "values drained");
    check(int'(exp_q.size()), 0, "nothing left");
    check(pauses > 0, 1, "walk paused on full FIFO");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
