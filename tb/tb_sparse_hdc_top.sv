// tb_sparse_hdc_top: end-to-end test of the whole classifier at its default
// size (64 channels, D = 1024, frames of 256 samples, threshold 130, two
// classes). No parameter of the top is overridden.
//
// Stimulus: every channel is a rising ramp (regime A) or a falling ramp
// (regime B) with random noise on each step, so the LBP codes are mostly
// 111111 or 000000 with random deviations. A reference model in the
// testbench recomputes LBP codes, CompIM positions, bound bit positions, the
// OR bundle, the temporal counts, the thresholded frame HV and the two
// similarity scores. Frames 0 and 1 (A and B) are classified against an empty
// AM; their HVs are then written into the AM as class 0 and class 1, which is
// how one-shot training uses the encoder output. Frames 2..5 alternate A/B
// with other noise and must be classified by the scores.
//
// Checked: every frame HV bit, both scores and the prediction per frame; one
// frame every 256 clocks with continuous input and 256 + gap clocks when the
// input pauses (last frame); prediction exactly 3 clocks after its frame.
// Mechanisms that must each occur: OR collisions in the spatial bundle,
// elements dropped by the thinning threshold, elements kept by it,
// predictions of each class, AM writes, and pauses of the input.
module tb_sparse_hdc_top;
  import tb_ref_pkg::*;
  localparam int NUM_CH = 64, D = 1024, NUM_SEG = 8, SEG_LEN = 128, FRAME = 256, TH = 130;
  localparam int NF = 6;

  logic clk = 0, rst_n = 0;
  logic sample_valid = 0;
  logic [NUM_CH-1:0][15:0] samples = '0;
  logic am_we = 0;
  logic [0:0] am_waddr = '0;
  logic [D-1:0] am_wdata = '0;
  logic frame_valid, pred_valid;
  logic [D-1:0] frame_hv;
  logic [0:0] pred;
  logic [1:0][10:0] scores;

  sparse_hdc_top dut (.*);

  always #50 clk = ~clk;   // 10 MHz

  int checks = 0, failures = 0;
  // reference state
  int im_pos [NUM_CH][64][NUM_SEG];
  int ehv_pos [NUM_CH][NUM_SEG];
  int prev_s [NUM_CH];
  int code [NUM_CH];
  int cnt [D];
  int hits [D];
  logic [D-1:0] ref_hv [NF];
  logic [D-1:0] am_model [2];
  int n_valid = 0, frames_done = 0, preds_done = 0;
  // mechanism counters
  int n_collide = 0, n_thinned = 0, n_kept = 0, n_pred [2], n_am_wr = 0, n_gap = 0;
  // timing
  longint cyc = 0, last_frame_cyc = -1, frame_cyc [NF];
  int gap_in_frame [NF];

  always @(posedge clk) cyc++;

  initial begin : watchdog
    repeat (NF * FRAME + 2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference: feed one sample vector
  task automatic ref_sample(input int s [NUM_CH]);
    for (int i = 0; i < D; i++) hits[i] = 0;
    for (int c = 0; c < NUM_CH; c++) begin
      code[c] = ((code[c] << 1) | ((s[c] > prev_s[c]) ? 1 : 0)) & 63;
      prev_s[c] = s[c];
      for (int g = 0; g < NUM_SEG; g++)
        hits[g * SEG_LEN + int'(ref_bound_idx(ehv_pos[c][g], im_pos[c][code[c]][g], SEG_LEN))]++;
    end
    for (int i = 0; i < D; i++) begin
      if (hits[i] > 1) n_collide++;
      if (hits[i] > 0) cnt[i]++;
    end
    n_valid++;
    if (n_valid % FRAME == 0) begin
      int f;
      f = n_valid / FRAME - 1;
      for (int i = 0; i < D; i++) begin
        ref_hv[f][i] = (cnt[i] >= TH);
        if (cnt[i] >= TH) n_kept++; else if (cnt[i] > 0) n_thinned++;
        cnt[i] = 0;
      end
    end
  endtask

  // monitor: frames and predictions
  always @(negedge clk) if (rst_n) begin
    if (frame_valid) begin
      int ones;
      checks++;
      if (frames_done >= NF) begin failures++; $display("extra frame"); end
      else begin
        frame_cyc[frames_done] = cyc;
        ones = 0;
        for (int i = 0; i < D; i++) begin
          ones += int'(frame_hv[i]);
          checks++;
          if (frame_hv[i] !== ref_hv[frames_done][i]) begin
            failures++;
            if (failures < 10) $display("frame %0d bit %0d got %b", frames_done, i, frame_hv[i]);
          end
        end
        $display("frame %0d at cycle %0d: %0d of %0d elements set", frames_done, cyc, ones, D);
        if (frames_done > 0) begin
          checks++;
          if (frame_cyc[frames_done] - frame_cyc[frames_done-1] != FRAME + gap_in_frame[frames_done]) begin
            failures++; $display("frame interval %0d", frame_cyc[frames_done] - frame_cyc[frames_done-1]);
          end
        end
      end
      frames_done++;
    end
    if (pred_valid) begin
      int s0, s1, pe;
      checks++;
      if (preds_done >= frames_done || cyc - frame_cyc[preds_done] != 3) begin
        failures++; $display("prediction latency %0d", cyc - frame_cyc[preds_done]);
      end
      s0 = int'(ref_popcount_and(ref_hv[preds_done], am_model[0], D));
      s1 = int'(ref_popcount_and(ref_hv[preds_done], am_model[1], D));
      pe = (s1 > s0) ? 1 : 0;
      checks += 3;
      if (int'(scores[0]) != s0 || int'(scores[1]) != s1 || int'(pred) != pe) begin
        failures++;
        $display("frame %0d: scores %0d %0d pred %0d, expected %0d %0d %0d", preds_done, scores[0], scores[1], pred, s0, s1, pe);
      end
      $display("frame %0d: scores %0d / %0d -> class %0d", preds_done, scores[0], scores[1], pred);
      n_pred[pe]++;
      preds_done++;
    end
  end

  initial begin
    int s [NUM_CH];
    int level [NUM_CH];
    n_pred[0] = 0; n_pred[1] = 0;
    for (int c = 0; c < NUM_CH; c++) begin
      prev_s[c] = 0; code[c] = 0; level[c] = 0;
      for (int g = 0; g < NUM_SEG; g++) begin
        ehv_pos[c][g] = int'(ref_ehv_pos(c, g, SEG_LEN));
        for (int k = 0; k < 64; k++) im_pos[c][k][g] = int'(ref_im_pos(c, k, g, SEG_LEN));
      end
    end
    for (int i = 0; i < D; i++) cnt[i] = 0;
    for (int f = 0; f < NF; f++) gap_in_frame[f] = 0;
    am_model[0] = '0; am_model[1] = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;

    for (int f = 0; f < NF; f++) begin
      int step, noise;
      step  = (f % 2 == 0) ? 40 : -40;          // regime A rises, B falls
      noise = (f < 2) ? 40 : 44 + 4 * f;        // noise amplitude
      for (int t = 0; t < FRAME; t++) begin
        @(negedge clk);
        am_we = 0;
        // training: write frames 0 and 1 into the AM during frame 2
        if (f == 2 && t == 10) begin am_we = 1; am_waddr = 1'b0; am_wdata = ref_hv[0]; am_model[0] = ref_hv[0]; n_am_wr++; end
        if (f == 2 && t == 11) begin am_we = 1; am_waddr = 1'b1; am_wdata = ref_hv[1]; am_model[1] = ref_hv[1]; n_am_wr++; end
        // input pauses in the last frame
        if (f == NF - 1 && t % 50 == 7) begin
          sample_valid = 0;
          n_gap++;
          gap_in_frame[f + 1 < NF ? f + 1 : f]++;
          @(negedge clk);
          am_we = 0;
        end
        for (int c = 0; c < NUM_CH; c++) begin
          level[c] += step + int'($urandom % (2 * noise + 1)) - noise;
          if (level[c] > 30000 || level[c] < -30000) level[c] = 0;
          s[c] = level[c];
          samples[c] = 16'(s[c]);
        end
        sample_valid = 1;
        ref_sample(s);
      end
    end
    @(negedge clk);
    sample_valid = 0;
    repeat (10) @(negedge clk);

    checks++; if (frames_done != NF) begin failures++; $display("frames %0d", frames_done); end
    checks++; if (preds_done != NF) begin failures++; $display("predictions %0d", preds_done); end
    $display("mechanisms: OR collisions %0d, thinned %0d, kept %0d, class0 %0d, class1 %0d, AM writes %0d, input pauses %0d",
             n_collide, n_thinned, n_kept, n_pred[0], n_pred[1], n_am_wr, n_gap);
    checks++; if (n_collide == 0) begin failures++; $display("no OR collision"); end
    checks++; if (n_thinned == 0) begin failures++; $display("thinning never dropped an element"); end
    checks++; if (n_kept == 0) begin failures++; $display("thinning never kept an element"); end
    checks++; if (n_pred[0] == 0) begin failures++; $display("class 0 never predicted"); end
    checks++; if (n_pred[1] == 0) begin failures++; $display("class 1 never predicted"); end
    checks++; if (n_am_wr == 0) begin failures++; $display("AM never written"); end
    checks++; if (n_gap == 0) begin failures++; $display("input never paused"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
