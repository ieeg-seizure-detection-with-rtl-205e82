// assoc_memory: associative memory (AM) holding the class HVs.
//
// NUM_CLASSES registers of D bits (two classes by default: non-seizure and
// seizure). The class HVs are trained offline and written through the write
// port (we, waddr, wdata) before inference; a write takes effect at the next
// clock edge. The read port is asynchronous: rdata = class HV raddr, which
// the similarity search steps through one class per cycle. Reset clears the
// memory. The register-file form and the write port are this design's
// choices; the paper only states that the AM stores the trained class HVs.
module assoc_memory
#(
  parameter int unsigned D           = hdc_pkg::D,
  parameter int unsigned NUM_CLASSES = hdc_pkg::NUM_CLASSES,
  parameter int unsigned CLS_W       = (NUM_CLASSES > 1) ? $clog2(NUM_CLASSES) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              we,
  input  logic [CLS_W-1:0]  waddr,
  input  logic [D-1:0]      wdata,
  input  logic [CLS_W-1:0]  raddr,
  output logic [D-1:0]      rdata
);

  logic [D-1:0] mem [NUM_CLASSES];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int k = 0; k < int'(NUM_CLASSES); k++) mem[k] <= '0;
    end else if (we && (int'(waddr) < int'(NUM_CLASSES))) begin
      mem[waddr] <= wdata;
    end
  end

  assign rdata = (int'(raddr) < int'(NUM_CLASSES)) ? mem[raddr] : '0;

endmodule
