// tb_comp_im: checks every entry of every channel's CompIM table against the
// reference generator, and the packing of the 8 x 7-bit positions.
module tb_comp_im;
  import tb_ref_pkg::*;
  localparam int NUM_CH = 64, LBP_W = 6, NUM_SEG = 8, POS_W = 7, SEG_LEN = 128;

  logic [NUM_CH-1:0][LBP_W-1:0] lbp;
  logic [NUM_CH-1:0][NUM_SEG-1:0][POS_W-1:0] pos;
  int checks = 0, failures = 0;
  int hist [SEG_LEN];

  comp_im dut (.lbp, .pos);

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < SEG_LEN; i++) hist[i] = 0;
    for (int k = 0; k < (1 << LBP_W); k++) begin
      // rotate codes across channels so all channels see all codes
      for (int c = 0; c < NUM_CH; c++) lbp[c] = LBP_W'((k + c) % (1 << LBP_W));
      #1;
      for (int c = 0; c < NUM_CH; c++)
        for (int s = 0; s < NUM_SEG; s++) begin
          int unsigned e;
          e = ref_im_pos(c, (k + c) % (1 << LBP_W), s, SEG_LEN);
          hist[e]++;
          checks++;
          if (int'(pos[c][s]) != int'(e)) begin
            failures++;
            if (failures < 10) $display("ch=%0d code=%0d seg=%0d pos=%0d exp=%0d", c, (k + c) % 64, s, pos[c][s], e);
          end
        end
    end
    // the table must use the whole segment range (sanity of the generator)
    for (int i = 0; i < SEG_LEN; i++) begin
      checks++;
      if (hist[i] == 0) begin failures++; $display("position %0d never used", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
