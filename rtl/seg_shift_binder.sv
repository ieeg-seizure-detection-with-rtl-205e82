// seg_shift_binder: segmented shift binding of one channel.
//
// The electrode HV (ehv) is cut into NUM_SEG segments of SEG_LEN bits. Segment
// s is rotated circularly by the position pos[s] of the 1-bit in segment s of
// the data HV, as delivered by the CompIM, so no one-hot decoder is needed.
//
// Convention (taken from the worked example of the binding operation): a
// position is the bit index counted from the segment's least significant bit
// and a 1-bit at index p rotates the segment by p+1 places towards the least
// significant bit, i.e. bound[j] = ehv[(j + p + 1) mod SEG_LEN] inside the
// segment. The fixed rotation by one is plain wiring; the variable rotation by
// p is a barrel shifter (log2(SEG_LEN) stages after synthesis).
//
// The segmented shift binding itself and its 8 x 128-bit segments follow the
// published design; the rotation convention is read from its worked example.
//
// Purely combinational.
module seg_shift_binder
#(
  parameter int unsigned NUM_SEG = hdc_pkg::NUM_SEG,
  parameter int unsigned SEG_LEN = hdc_pkg::SEG_LEN,
  parameter int unsigned POS_W   = $clog2(SEG_LEN)
) (
  input  logic [NUM_SEG-1:0][POS_W-1:0]        pos,
  input  logic [NUM_SEG-1:0][SEG_LEN-1:0]      ehv,
  output logic [NUM_SEG-1:0][SEG_LEN-1:0]      bound
);

  for (genvar s = 0; s < int'(NUM_SEG); s++) begin : g_seg
    logic [SEG_LEN-1:0]   rot1;
    logic [2*SEG_LEN-1:0] dbl;
    // rotate by one towards the LSB (wiring only)
    assign rot1     = {ehv[s][0], ehv[s][SEG_LEN-1:1]};
    // barrel rotate by pos[s] towards the LSB
    assign dbl      = {rot1, rot1} >> pos[s];
    assign bound[s] = dbl[SEG_LEN-1:0];
  end

endmodule
