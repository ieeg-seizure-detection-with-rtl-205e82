// tb_spatial_encoder: checks binding of all 64 channels plus OR bundling.
// The expected HV is built from the reference electrode-HV positions and the
// bound index (e - p - 1) mod 128 per channel and segment, OR-ed together.
// It also counts elements hit by more than one channel (the OR case where an
// adder tree would have counted 2 or more) and requires that this happens.
module tb_spatial_encoder;
  import tb_ref_pkg::*;
  localparam int NUM_CH = 64, NUM_SEG = 8, SEG_LEN = 128, POS_W = 7, D = 1024;

  logic [NUM_CH-1:0][NUM_SEG-1:0][POS_W-1:0] pos;
  logic [D-1:0] hv;
  int checks = 0, failures = 0, overlaps = 0;
  int hits [D];

  spatial_encoder dut (.pos, .hv);

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 300; n++) begin
      for (int i = 0; i < D; i++) hits[i] = 0;
      for (int c = 0; c < NUM_CH; c++)
        for (int s = 0; s < NUM_SEG; s++) begin
          int unsigned p;
          p = (n == 0) ? 0 : $urandom % SEG_LEN;
          pos[c][s] = POS_W'(p);
          hits[s * SEG_LEN + int'(ref_bound_idx(ref_ehv_pos(c, s, SEG_LEN), p, SEG_LEN))]++;
        end
      #1;
      for (int i = 0; i < D; i++) begin
        checks++;
        if (hv[i] !== (hits[i] > 0)) begin
          failures++;
          if (failures < 10) $display("n=%0d bit %0d got %b hits %0d", n, i, hv[i], hits[i]);
        end
        if (hits[i] > 1) overlaps++;
      end
    end
    checks++;
    if (overlaps == 0) begin failures++; $display("no overlapping channels seen"); end
    $display("overlapping elements: %0d", overlaps);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
