// tb_seg_shift_binder: checks the segmented shift binding.
// Part 1 uses 8-bit segments and the two-segment worked example of the
// operation (data segments 00000001 / 00100000 shifting electrode segments
// 01000000 / 00010000 into 00100000 / 01000000). Part 2 runs the default
// 8 x 128-bit binder on random electrode HVs (any density) and random
// positions against out[j] = in[(j+p+1) mod 128].
module tb_seg_shift_binder;
  int checks = 0, failures = 0;

  // Part 1: worked example, 2 segments of 8 bits
  logic [1:0][2:0] pos_s;
  logic [1:0][7:0] ehv_s, bound_s;
  seg_shift_binder #(.NUM_SEG(2), .SEG_LEN(8)) dut_small (.pos(pos_s), .ehv(ehv_s), .bound(bound_s));

  // Part 2: default size
  logic [7:0][6:0]   pos;
  logic [7:0][127:0] ehv, bound;
  seg_shift_binder dut (.pos, .ehv, .bound);

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // segment 0 = "Segment 1" of the example, written MSB first
    ehv_s[0] = 8'b01000000; pos_s[0] = 3'd0;   // data 00000001 -> index 0
    ehv_s[1] = 8'b00010000; pos_s[1] = 3'd5;   // data 00100000 -> index 5
    #1;
    checks++; if (bound_s[0] !== 8'b00100000) begin failures++; $display("example seg1 %b", bound_s[0]); end
    checks++; if (bound_s[1] !== 8'b01000000) begin failures++; $display("example seg2 %b", bound_s[1]); end

    for (int n = 0; n < 2000; n++) begin
      for (int s = 0; s < 8; s++) begin
        pos[s] = 7'($urandom);
        ehv[s] = {$urandom, $urandom, $urandom, $urandom};
        if (n % 2 == 0) begin   // sparse case: one 1-bit per segment
          ehv[s] = '0;
          ehv[s][$urandom % 128] = 1'b1;
        end
      end
      #1;
      for (int s = 0; s < 8; s++)
        for (int j = 0; j < 128; j++) begin
          checks++;
          if (bound[s][j] !== ehv[s][(j + int'(pos[s]) + 1) % 128]) begin
            failures++;
            if (failures < 10) $display("n=%0d s=%0d j=%0d p=%0d", n, s, j, pos[s]);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
