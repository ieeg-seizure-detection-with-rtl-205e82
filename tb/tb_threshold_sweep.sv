// tb_threshold_sweep: the thinning threshold sets the maximum density of the
// frame HVs, the hyperparameter that is swept to trade detection delay
// against accuracy. Five full-size classifiers with thresholds 64, 100, 130,
// 160 and 220 receive the same noisy-ramp stimulus. Every frame HV of every
// instance is checked bit by bit against the reference counts, and the frame
// density must not rise as the threshold rises. Densities are printed per
// threshold. With an empty AM all scores must be 0.
module tb_threshold_sweep;
  import tb_ref_pkg::*;
  localparam int NUM_CH = 64, D = 1024, NUM_SEG = 8, SEG_LEN = 128, FRAME = 256;
  localparam int NT = 5, NF = 3;
  localparam int TH [NT] = '{64, 100, 130, 160, 220};

  logic clk = 0, rst_n = 0, sample_valid = 0;
  logic [NUM_CH-1:0][15:0] samples = '0;
  logic [NT-1:0] frame_valid, pred_valid;
  logic [D-1:0] frame_hv [NT];
  logic [0:0] pred [NT];
  logic [1:0][10:0] scores [NT];

  for (genvar t = 0; t < NT; t++) begin : g_dut
    sparse_hdc_top #(.THRESHOLD(TH[t])) dut (
      .clk, .rst_n, .sample_valid, .samples,
      .am_we(1'b0), .am_waddr(1'b0), .am_wdata('0),
      .frame_valid(frame_valid[t]), .frame_hv(frame_hv[t]),
      .pred_valid(pred_valid[t]), .pred(pred[t]), .scores(scores[t]));
  end

  always #50 clk = ~clk;

  int checks = 0, failures = 0;
  int im_pos [NUM_CH][64][NUM_SEG];
  int ehv_pos [NUM_CH][NUM_SEG];
  int prev_s [NUM_CH], code [NUM_CH], level [NUM_CH];
  int cnt [D], hits [D];
  int frame_cnt [NF][D];
  int n_valid = 0, frames_seen = 0;
  int dens [NT];

  initial begin : watchdog
    repeat (NF * FRAME + 500) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n) begin
    if (frame_valid[0]) begin
      checks++;
      if (frame_valid !== '1) begin failures++; $display("instances out of step"); end
      for (int t = 0; t < NT; t++) begin
        int ones;
        ones = 0;
        for (int i = 0; i < D; i++) begin
          checks++;
          if (frame_hv[t][i] !== (frame_cnt[frames_seen][i] >= TH[t])) begin
            failures++;
            if (failures < 10) $display("th %0d frame %0d bit %0d", TH[t], frames_seen, i);
          end
          ones += int'(frame_hv[t][i]);
        end
        dens[t] += ones;
      end
      frames_seen++;
    end
    if (pred_valid[0]) begin
      for (int t = 0; t < NT; t++) begin
        checks++;
        if (scores[t] != '0 || pred[t] != 1'b0) begin failures++; $display("nonzero score with empty AM"); end
      end
    end
  end

  initial begin
    for (int t = 0; t < NT; t++) dens[t] = 0;
    for (int c = 0; c < NUM_CH; c++) begin
      prev_s[c] = 0; code[c] = 0; level[c] = 0;
      for (int g = 0; g < NUM_SEG; g++) begin
        ehv_pos[c][g] = int'(ref_ehv_pos(c, g, SEG_LEN));
        for (int k = 0; k < 64; k++) im_pos[c][k][g] = int'(ref_im_pos(c, k, g, SEG_LEN));
      end
    end
    for (int i = 0; i < D; i++) cnt[i] = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int f = 0; f < NF; f++) begin
      for (int t = 0; t < FRAME; t++) begin
        @(negedge clk);
        for (int c = 0; c < NUM_CH; c++) begin
          // channel-dependent drift with noise
          level[c] += ((c % 3) - 1) * 30 + int'($urandom % 121) - 60;
          if (level[c] > 30000 || level[c] < -30000) level[c] = 0;
          samples[c] = 16'(level[c]);
        end
        sample_valid = 1;
        for (int i = 0; i < D; i++) hits[i] = 0;
        for (int c = 0; c < NUM_CH; c++) begin
          code[c] = ((code[c] << 1) | ((level[c] > prev_s[c]) ? 1 : 0)) & 63;
          prev_s[c] = level[c];
          for (int g = 0; g < NUM_SEG; g++)
            hits[g * SEG_LEN + int'(ref_bound_idx(ehv_pos[c][g], im_pos[c][code[c]][g], SEG_LEN))]++;
        end
        for (int i = 0; i < D; i++) if (hits[i] > 0) cnt[i]++;
        n_valid++;
        if (n_valid % FRAME == 0) begin
          for (int i = 0; i < D; i++) begin frame_cnt[f][i] = cnt[i]; cnt[i] = 0; end
        end
      end
    end
    @(negedge clk) sample_valid = 0;
    repeat (10) @(negedge clk);
    checks++; if (frames_seen != NF) begin failures++; $display("frames %0d", frames_seen); end
    for (int t = 0; t < NT; t++) begin
      $display("threshold %0d: mean frame density %0d.%0d %%", TH[t], dens[t] * 100 / (NF * D),
               (dens[t] * 1000 / (NF * D)) % 10);
      if (t > 0) begin
        checks++;
        if (dens[t] > dens[t-1]) begin failures++; $display("density rose with the threshold"); end
      end
    end
    checks++; if (dens[0] == dens[NT-1]) begin failures++; $display("threshold has no effect"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
