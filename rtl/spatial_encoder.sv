// spatial_encoder: binding of all channels and spatial bundling by OR trees.
//
// Each channel c owns a fixed random electrode HV E_HV(c) with one 1-bit per
// segment. A seg_shift_binder per channel binds E_HV(c) with the compressed
// data HV pos[c] from the CompIM, and the NUM_CH bound HVs are bundled by a
// NUM_CH-input OR per HV element. The OR replaces the adder tree and threshold
// of a conventional bundling: with 64 HVs of 8 ones each, at most 512 of the
// 1024 bits can be set, so the result never saturates and needs no thinning.
//
// Replacing the adder trees and threshold by OR trees is the published
// design's optimisation, not a simplification made here.
//
// E_HV(c) has its 1-bit of segment s at index
// hdc_pkg::table_hash(SALT_EHV, c, 0, s) mod SEG_LEN (this design's generator;
// the electrode HVs are only required to be random and fixed).
//
// Purely combinational: hv follows pos in the same cycle.
module spatial_encoder
#(
  parameter int unsigned NUM_CH  = hdc_pkg::NUM_CH,
  parameter int unsigned NUM_SEG = hdc_pkg::NUM_SEG,
  parameter int unsigned SEG_LEN = hdc_pkg::SEG_LEN,
  parameter int unsigned POS_W   = $clog2(SEG_LEN)
) (
  input  logic [NUM_CH-1:0][NUM_SEG-1:0][POS_W-1:0]  pos,
  output logic [NUM_SEG*SEG_LEN-1:0]                 hv
);

  typedef logic [NUM_SEG-1:0][SEG_LEN-1:0] shv_t;

  function automatic shv_t gen_ehv(input int unsigned ch);
    shv_t e;
    logic [31:0] h;
    e = '0;
    for (int unsigned s = 0; s < NUM_SEG; s++) begin
      h = hdc_pkg::table_hash(hdc_pkg::SALT_EHV, ch, 0, s);
      e[s][h[POS_W-1:0]] = 1'b1;
    end
    return e;
  endfunction

  shv_t [NUM_CH-1:0] bound;

  for (genvar c = 0; c < int'(NUM_CH); c++) begin : g_ch
    localparam shv_t EHV = gen_ehv(c);
    seg_shift_binder #(
      .NUM_SEG(NUM_SEG), .SEG_LEN(SEG_LEN), .POS_W(POS_W)
    ) u_bind (
      .pos  (pos[c]),
      .ehv  (EHV),
      .bound(bound[c])
    );
  end

  // OR tree per HV element
  always_comb begin
    shv_t acc;
    acc = '0;
    for (int c = 0; c < int'(NUM_CH); c++) acc |= bound[c];
    hv = acc;
  end

endmodule
