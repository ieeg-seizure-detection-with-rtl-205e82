// hdc_pkg: shared sizes, types and the design-time random generator of the
// sparse HDC seizure classifier.
//
// The default sizes are those of the reference configuration: 64 iEEG
// channels, 6-bit LBP codes, 1024-bit hypervectors split into 8 segments of
// 128 bits (one 1-bit per segment, so a position needs 7 bits), time frames of
// 256 spatial HVs, 8-bit temporal accumulators, a temporal threshold of 130 and
// two classes (non-seizure / seizure).
//
// The item memory and the electrode HVs are random tables fixed at design
// time. They are produced here by a 32-bit integer hash (the finaliser of
// MurmurHash3) of a key built from a salt, the channel, the LBP code and the
// segment index; the low bits of the hash give a bit position within a
// segment. Using a hash rather than a stored table keeps the RTL free of large
// data files and lets the synthesis tool fold each table into constant logic.
// The sample width (16 bits) is this design's choice.
package hdc_pkg;

  localparam int unsigned NUM_CH      = 64;    // electrodes / channels
  localparam int unsigned SAMPLE_W    = 16;    // ADC sample width (assumed)
  localparam int unsigned LBP_W       = 6;     // LBP code width
  localparam int unsigned D           = 1024;  // HV dimension
  localparam int unsigned NUM_SEG     = 8;     // segments per HV
  localparam int unsigned SEG_LEN     = D / NUM_SEG;       // 128
  localparam int unsigned POS_W       = $clog2(SEG_LEN);   // 7
  localparam int unsigned FRAME       = 256;   // spatial HVs per time frame
  localparam int unsigned THRESHOLD   = 130;   // temporal thinning threshold
  localparam int unsigned NUM_CLASSES = 2;     // AM entries

  // Salts that keep the two random tables independent.
  localparam logic [31:0] SALT_IM  = 32'h1;
  localparam logic [31:0] SALT_EHV = 32'h2;

  typedef logic [D-1:0]                    hv_t;
  typedef logic [NUM_SEG-1:0][POS_W-1:0]   cpos_t;   // compressed HV: 8 x 7 bits
  typedef logic [LBP_W-1:0]                lbp_t;
  typedef logic signed [SAMPLE_W-1:0]      sample_t;

  // 32-bit avalanche hash (MurmurHash3 fmix32).
  function automatic logic [31:0] mix32(input logic [31:0] k);
    logic [31:0] x;
    x = k;
    x = x ^ (x >> 16);
    x = x * 32'h85eb_ca6b;
    x = x ^ (x >> 13);
    x = x * 32'hc2b2_ae35;
    x = x ^ (x >> 16);
    return x;
  endfunction

  // Random value for (salt, channel, code, segment); callers keep the low
  // bits they need. Channel, code and segment are each limited to 10 bits.
  function automatic logic [31:0] table_hash(input logic [31:0] salt, input int unsigned ch,
                                             input int unsigned code, input int unsigned seg);
    logic [31:0] key;
    key = (salt << 30) ^ (32'(ch & 10'h3ff) << 20) ^ (32'(code & 10'h3ff) << 10)
          ^ 32'(seg & 10'h3ff);
    return mix32(key);
  endfunction

endpackage
