// temporal_encoder: temporal bundling with thinning over one time frame.
//
// Every valid cycle the D-bit spatial HV is added element-wise into D
// accumulators of ACC_W = log2(FRAME) bits (8 bits x 1024 = 8192 flip-flops
// by default). After FRAME valid inputs (256 by default) the frame is closed:
// element i of the output HV is 1 when its count reaches THRESHOLD, and the
// accumulators restart from zero. The FRAME-th input is not stored but added
// on the fly into the comparison (ACC_W+1 bits wide), so an 8-bit accumulator
// suffices even when an element is set in all 256 inputs.
//
// Frames of 256 HVs, 8-bit accumulators and the threshold of 130 follow the
// published design.
//
// Interface: in_valid/in_hv carry one spatial HV per cycle. out_valid pulses
// for one cycle, one clock after the FRAME-th input, and out_hv then holds the
// frame's HV until the next frame closes. A new frame therefore appears every
// FRAME valid inputs. "count >= THRESHOLD" (rather than ">") and the
// synchronous active-low reset are this design's choices.
module temporal_encoder
#(
  parameter int unsigned D         = hdc_pkg::D,
  parameter int unsigned FRAME     = hdc_pkg::FRAME,
  parameter int unsigned THRESHOLD = hdc_pkg::THRESHOLD,
  parameter int unsigned ACC_W     = $clog2(FRAME)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic [D-1:0]  in_hv,
  output logic          out_valid,
  output logic [D-1:0]  out_hv,
  output logic [ACC_W-1:0] frame_pos      // inputs already taken in this frame
);

  logic [D-1:0][ACC_W-1:0] acc;
  logic                    last;

  assign last = (frame_pos == ACC_W'(FRAME - 1));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      acc       <= '0;
      frame_pos <= '0;
      out_valid <= 1'b0;
      out_hv    <= '0;
    end else begin
      out_valid <= in_valid && last;
      if (in_valid) begin
        frame_pos <= last ? '0 : frame_pos + 1'b1;
        for (int i = 0; i < int'(D); i++) begin
          if (last) begin
            acc[i]    <= '0;
            out_hv[i] <= ({1'b0, acc[i]} + (ACC_W+1)'(in_hv[i])) >= (ACC_W+1)'(THRESHOLD);
          end else begin
            acc[i]    <= acc[i] + ACC_W'(in_hv[i]);
          end
        end
      end
    end
  end

  initial begin
    assert (FRAME >= 2 && (1 << ACC_W) >= FRAME)
      else $error("temporal_encoder: ACC_W too small for FRAME");
  end

endmodule
