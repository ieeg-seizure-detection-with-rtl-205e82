// sparse_hdc_top: sparse hyperdimensional (HDC) iEEG seizure classifier.
//
// Data path, one sample per channel per clock:
//   samples -> lbp_preproc (1 register stage) -> comp_im -> spatial_encoder
//   (64 segmented shift bindings + OR trees, combinational) -> temporal_encoder
//   (8-bit accumulators, threshold at the end of each 256-sample frame)
//   -> similarity_search against the class HVs of assoc_memory -> prediction.
//
// Timing: the first LBP code leaves lbp_preproc one clock after its sample.
// A frame of FRAME codes closes one clock after its last code (frame_valid),
// and the prediction (pred_valid) follows NUM_CLASSES+1 clocks later. With
// samples every clock this is one prediction per FRAME = 256 clocks, i.e.
// 25.6 us at 10 MHz. The search of one frame overlaps the next frame's
// accumulation, so the input never stalls.
//
// The block structure, sizes and rates follow the published design; the
// ports, the AM load path and the reset are choices made here.
//
// The AM must be loaded through am_we/am_waddr/am_wdata (offline-trained class
// HVs) before predictions are meaningful. The ADC is outside this block: its
// digitised samples arrive on samples/sample_valid. frame_hv is exported so
// the class HVs can be trained from the chip's own encoder output.
// Synchronous active-low reset for all registers.
module sparse_hdc_top
#(
  parameter int unsigned NUM_CH      = hdc_pkg::NUM_CH,
  parameter int unsigned SAMPLE_W    = hdc_pkg::SAMPLE_W,
  parameter int unsigned LBP_W       = hdc_pkg::LBP_W,
  parameter int unsigned NUM_SEG     = hdc_pkg::NUM_SEG,
  parameter int unsigned SEG_LEN     = hdc_pkg::SEG_LEN,
  parameter int unsigned FRAME       = hdc_pkg::FRAME,
  parameter int unsigned THRESHOLD   = hdc_pkg::THRESHOLD,
  parameter int unsigned NUM_CLASSES = hdc_pkg::NUM_CLASSES,
  localparam int unsigned D          = NUM_SEG * SEG_LEN,
  localparam int unsigned POS_W      = $clog2(SEG_LEN),
  localparam int unsigned CLS_W      = (NUM_CLASSES > 1) ? $clog2(NUM_CLASSES) : 1,
  localparam int unsigned SCORE_W    = $clog2(D + 1)
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  // digitised electrode samples, one per channel
  input  logic                                 sample_valid,
  input  logic [NUM_CH-1:0][SAMPLE_W-1:0]      samples,
  // AM load port
  input  logic                                 am_we,
  input  logic [CLS_W-1:0]                     am_waddr,
  input  logic [D-1:0]                         am_wdata,
  // encoded time frame
  output logic                                 frame_valid,
  output logic [D-1:0]                         frame_hv,
  // classification
  output logic                                 pred_valid,
  output logic [CLS_W-1:0]                     pred,
  output logic [NUM_CLASSES-1:0][SCORE_W-1:0]  scores
);

  logic                                     lbp_valid;
  logic [NUM_CH-1:0][LBP_W-1:0]             lbp;
  logic [NUM_CH-1:0][NUM_SEG-1:0][POS_W-1:0] pos;
  logic [D-1:0]                             spatial_hv;
  logic [$clog2(FRAME)-1:0]                 frame_pos;
  logic [CLS_W-1:0]                         am_raddr;
  logic [D-1:0]                             am_rdata;
  logic                                     search_busy;
  logic [SCORE_W-1:0]                       best_score;

  lbp_preproc #(.NUM_CH(NUM_CH), .SAMPLE_W(SAMPLE_W), .LBP_W(LBP_W)) u_lbp (
    .clk, .rst_n,
    .in_valid (sample_valid), .samples,
    .out_valid(lbp_valid),    .lbp
  );

  comp_im #(.NUM_CH(NUM_CH), .LBP_W(LBP_W), .NUM_SEG(NUM_SEG), .POS_W(POS_W)) u_im (
    .lbp, .pos
  );

  spatial_encoder #(.NUM_CH(NUM_CH), .NUM_SEG(NUM_SEG), .SEG_LEN(SEG_LEN), .POS_W(POS_W)) u_spatial (
    .pos, .hv(spatial_hv)
  );

  temporal_encoder #(.D(D), .FRAME(FRAME), .THRESHOLD(THRESHOLD)) u_temporal (
    .clk, .rst_n,
    .in_valid (lbp_valid), .in_hv(spatial_hv),
    .out_valid(frame_valid), .out_hv(frame_hv),
    .frame_pos
  );

  assoc_memory #(.D(D), .NUM_CLASSES(NUM_CLASSES), .CLS_W(CLS_W)) u_am (
    .clk, .rst_n,
    .we(am_we), .waddr(am_waddr), .wdata(am_wdata),
    .raddr(am_raddr), .rdata(am_rdata)
  );

  similarity_search #(.D(D), .NUM_CLASSES(NUM_CLASSES), .CLS_W(CLS_W), .SCORE_W(SCORE_W)) u_search (
    .clk, .rst_n,
    .start(frame_valid), .query(frame_hv),
    .am_raddr, .am_rdata,
    .busy(search_busy), .done(pred_valid),
    .pred, .best_score, .scores
  );

  // A frame may only close once the previous search is over.
  assert property (@(posedge clk) disable iff (!rst_n) frame_valid |-> !search_busy)
    else $error("sparse_hdc_top: frame closed during a search");

endmodule
