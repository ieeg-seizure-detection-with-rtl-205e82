// tb_temporal_encoder: checks temporal bundling and thinning at full size
// (D = 1024, 256 HVs per frame, threshold 130). Element i is set with a
// probability that depends on i, so counts spread over 0..256 and the
// threshold is exercised on both sides (including an element set in all 256
// inputs, which needs the ninth comparison bit). in_valid has random gaps.
// Checks: out_valid exactly one clock after every 256th valid input and
// never otherwise, out_hv = (count >= 130) per element, out_hv held between
// frames, and the frame position counter.
module tb_temporal_encoder;
  localparam int D = 1024, FRAME = 256, TH = 130;

  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [D-1:0] in_hv = '0, out_hv, held;
  logic [7:0] frame_pos;
  int checks = 0, failures = 0;
  int cnt [D];
  int n_valid = 0, frames = 0, ones = 0, zeros_nonempty = 0;
  bit expect_out = 0;

  temporal_encoder dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < D; i++) cnt[i] = 0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    held = '0;
    while (frames < 3) begin
      @(negedge clk);
      // outputs of the previous edge
      checks++;
      if (out_valid !== expect_out) begin failures++; $display("out_valid=%b exp=%b", out_valid, expect_out); end
      checks++;
      if (int'(frame_pos) != n_valid % FRAME) begin failures++; $display("frame_pos %0d exp %0d", frame_pos, n_valid % FRAME); end
      if (expect_out) begin
        for (int i = 0; i < D; i++) begin
          checks++;
          if (out_hv[i] !== (cnt[i] >= TH)) begin
            failures++;
            if (failures < 10) $display("frame %0d bit %0d got %b count %0d", frames, i, out_hv[i], cnt[i]);
          end
          if (cnt[i] >= TH) ones++;
          else if (cnt[i] > 0) zeros_nonempty++;
          cnt[i] = 0;
        end
        held = out_hv;
        frames++;
      end else begin
        checks++;
        if (out_hv !== held) begin failures++; $display("out_hv changed outside a frame end"); end
      end
      expect_out = 0;
      // drive the next input
      in_valid = ($urandom % 5) != 0;
      for (int i = 0; i < D; i++) begin
        int pct;
        pct = (i % 64) * 100 / 63;           // 0 .. 100 %
        if (i % 64 == 51) pct = 51;           // near the threshold
        in_hv[i] = (int'($urandom % 100) < pct);
      end
      if (in_valid) begin
        for (int i = 0; i < D; i++) cnt[i] += int'(in_hv[i]);
        n_valid++;
        if (n_valid % FRAME == 0) expect_out = 1;
      end
    end
    checks++;
    if (ones == 0 || zeros_nonempty == 0) begin failures++; $display("threshold not exercised both ways"); end
    $display("kept %0d, thinned away %0d", ones, zeros_nonempty);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
