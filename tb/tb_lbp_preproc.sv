// tb_lbp_preproc: checks the LBP pre-processing on random sample streams.
// A software model keeps the previous sample and the code of each channel;
// the RTL codes are compared with it after every valid input, and the
// out_valid timing (one clock after in_valid) is checked every cycle.
module tb_lbp_preproc;
  localparam int NUM_CH = 64, SAMPLE_W = 16, LBP_W = 6;

  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [NUM_CH-1:0][SAMPLE_W-1:0] samples = '0;
  logic [NUM_CH-1:0][LBP_W-1:0] lbp;
  int checks = 0, failures = 0, cycles = 0;
  int prev_m [NUM_CH];
  int code_m [NUM_CH];
  logic last_valid = 0;

  lbp_preproc #(.NUM_CH(NUM_CH), .SAMPLE_W(SAMPLE_W), .LBP_W(LBP_W)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin : watchdog
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < NUM_CH; c++) begin prev_m[c] = 0; code_m[c] = 0; end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int t = 0; t < 600; t++) begin
      @(negedge clk);
      // check the result of the previous cycle
      if (out_valid !== last_valid) begin
        failures++; $display("out_valid mismatch at t=%0d", t);
      end
      checks++;
      for (int c = 0; c < NUM_CH; c++) begin
        checks++;
        if (int'(lbp[c]) != code_m[c]) begin
          failures++;
          if (failures < 10) $display("t=%0d ch=%0d lbp=%0h exp=%0h", t, c, lbp[c], code_m[c]);
        end
      end
      // new input
      in_valid = ($urandom % 4) != 0;
      last_valid = in_valid;
      for (int c = 0; c < NUM_CH; c++) begin
        int s;
        // small steps so that equal samples also occur
        s = (t < 300) ? (int'($urandom % 7) - 3 + prev_m[c]) : (int'($urandom % 65536) - 32768);
        if (s > 32767) s = 32767;
        if (s < -32768) s = -32768;
        samples[c] = SAMPLE_W'(s);
        if (in_valid) begin
          code_m[c] = ((code_m[c] << 1) | ((s > prev_m[c]) ? 1 : 0)) & ((1 << LBP_W) - 1);
          prev_m[c] = s;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
