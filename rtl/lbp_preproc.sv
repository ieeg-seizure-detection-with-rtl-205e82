// lbp_preproc: local binary pattern (LBP) pre-processing of all channels.
//
// For every channel it compares each new sample with the previous one and
// shifts the result (1 = the signal rose, 0 = it fell or stayed) into a
// LBP_W-bit history. That history is the channel's LBP code: it describes the
// shape of the last LBP_W steps of the signal and is what the item memory is
// indexed with. The classifier only needs "an LBP code per channel per clock";
// the compare-and-shift form, the signed sample format and the reset values
// (previous sample 0, history 0) are this design's choices.
//
// One 6-bit code per channel per clock follows the published design.
//
// Interface: in_valid qualifies one sample per channel; one cycle later
// out_valid is high and lbp[] holds the updated codes. Codes hold their value
// while in_valid is low. Synchronous active-low reset.
module lbp_preproc
#(
  parameter int unsigned NUM_CH   = hdc_pkg::NUM_CH,
  parameter int unsigned SAMPLE_W = hdc_pkg::SAMPLE_W,
  parameter int unsigned LBP_W    = hdc_pkg::LBP_W
) (
  input  logic                                    clk,
  input  logic                                    rst_n,
  input  logic                                    in_valid,
  input  logic [NUM_CH-1:0][SAMPLE_W-1:0]         samples,   // two's complement
  output logic                                    out_valid,
  output logic [NUM_CH-1:0][LBP_W-1:0]            lbp
);

  logic [NUM_CH-1:0][SAMPLE_W-1:0] prev;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      prev      <= '0;
      lbp       <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        for (int c = 0; c < int'(NUM_CH); c++) begin
          lbp[c]  <= {lbp[c][LBP_W-2:0], ($signed(samples[c]) > $signed(prev[c]))};
          prev[c] <= samples[c];
        end
      end
    end
  end

endmodule
