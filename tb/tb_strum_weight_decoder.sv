// tb_strum_weight_decoder: encodes random [1,16] blocks (any number of
// INT8 elements, 0..16) into mask + payload, decodes them and compares every
// field and the payload length. Also checks the Fig. 5 style example with
// p = 0.5: 8 INT8 + 8 4-bit codes use 96 payload bits (r = 7/8 with the
// 16-bit header).
module tb_strum_weight_decoder;
  import strum_pkg::*;
  import strum_tb_pkg::*;

  mask_t            mask;
  line_t            payload;
  wbyte_t [BLK-1:0] wf;
  logic [POS_W-1:0] used;
  int checks = 0, failures = 0;

  strum_weight_decoder #(.Q(4)) dut (.mask, .payload, .wfield(wf), .used_bits(used));

  task automatic run(blk_t b);
    mask = b.mask; payload = encode(b, 4);
    #1;
    for (int i = 0; i < BLK; i++) begin
      checks++;
      if (int'(wf[i]) != b.field[i]) begin
        failures++;
        if (failures < 10) $display("mask=%h elem %0d got %0d exp %0d", b.mask, i, wf[i], b.field[i]);
      end
    end
    checks++;
    if (int'(used) != payload_bits(b.mask, 4)) failures++;
  endtask

  initial begin
    blk_t b;
    // p = 0.5 block: header 1010_1100 repeated, 96 payload bits
    b = rand_block(8, 4);
    b.mask = 16'b0011_0101_0011_0101;
    for (int i = 0; i < BLK; i++) b.field[i] = b.mask[i] ? $urandom_range(255) : $urandom_range(15);
    run(b);
    checks++;
    if (int'(used) != 96 || (16 + int'(used)) * 8 != 128 * 7) failures++;
    for (int t = 0; t < 3000; t++) run(rand_block($urandom_range(16), 4));
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
