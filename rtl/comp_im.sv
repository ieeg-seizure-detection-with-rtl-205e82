// comp_im: compressed item memory (CompIM).
//
// In sparse HDC every item HV has exactly one 1-bit in each of its NUM_SEG
// segments. Instead of storing the D-bit HV and decoding it later, the CompIM
// stores, for every channel and every LBP code, only the bit index of that
// 1-bit within each segment: NUM_SEG x POS_W bits (8 x 7 = 56 bits by default)
// instead of D = 1024. Each channel has its own table of 2^LBP_W entries, as
// in the uncompressed item memory.
//
// The tables are random and fixed at design time. Entry (channel c, code k,
// segment s) is the low POS_W bits of hdc_pkg::table_hash(SALT_IM, c, k, s);
// the position counts from the segment's least significant bit. The hash is
// evaluated at elaboration into a constant ROM per channel, so the hardware is
// a set of 64-entry constant look-up tables. The generator is this design's
// choice; the paper only requires random HVs fixed at design time.
//
// Purely combinational: pos follows lbp in the same cycle.
module comp_im
#(
  parameter int unsigned NUM_CH  = hdc_pkg::NUM_CH,
  parameter int unsigned LBP_W   = hdc_pkg::LBP_W,
  parameter int unsigned NUM_SEG = hdc_pkg::NUM_SEG,
  parameter int unsigned POS_W   = hdc_pkg::POS_W
) (
  input  logic [NUM_CH-1:0][LBP_W-1:0]               lbp,
  output logic [NUM_CH-1:0][NUM_SEG-1:0][POS_W-1:0]  pos
);

  localparam int unsigned NUM_CODES = 1 << LBP_W;

  typedef logic [NUM_SEG-1:0][POS_W-1:0] entry_t;
  typedef entry_t [NUM_CODES-1:0]        rom_t;

  function automatic rom_t gen_rom(input int unsigned ch);
    rom_t r;
    logic [31:0] h;
    for (int unsigned k = 0; k < NUM_CODES; k++)
      for (int unsigned s = 0; s < NUM_SEG; s++) begin
        h       = hdc_pkg::table_hash(hdc_pkg::SALT_IM, ch, k, s);
        r[k][s] = h[POS_W-1:0];
      end
    return r;
  endfunction

  for (genvar c = 0; c < int'(NUM_CH); c++) begin : g_ch
    localparam rom_t ROM = gen_rom(c);
    assign pos[c] = ROM[lbp[c]];
  end

endmodule
