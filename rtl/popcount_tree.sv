// popcount_tree: balanced adder tree counting the 1-bits of an N-bit vector.
//
// The input is padded with zeros to M = 2^L bits (L = ceil(log2 N)). Level 0
// holds the M single bits; level l holds M/2^l partial sums of l+1 bits, each
// the sum of two neighbouring sums of level l-1. The single sum of level L is
// the count. Depth L adders, each one bit wider than the level below, as in
// an adder tree built by hand. Purely combinational. Helper of
// similarity_search.
module popcount_tree #(
  parameter int unsigned N     = 1024,
  parameter int unsigned OUT_W = $clog2(N + 1)
) (
  input  logic [N-1:0]      in,
  output logic [OUT_W-1:0]  count
);

  localparam int unsigned L = (N > 1) ? $clog2(N) : 0;
  localparam int unsigned M = 1 << L;

  for (genvar l = 0; l <= int'(L); l++) begin : g_lvl
    logic [l:0] sum [M >> l];
    if (l == 0) begin : g_leaf
      for (genvar i = 0; i < int'(M); i++) begin : g_bit
        if (i < int'(N)) begin : g_in
          assign sum[i] = in[i];
        end else begin : g_pad
          assign sum[i] = 1'b0;
        end
      end
    end else begin : g_add
      for (genvar i = 0; i < int'(M >> l); i++) begin : g_node
        assign sum[i] = {1'b0, g_lvl[l-1].sum[2*i]} + {1'b0, g_lvl[l-1].sum[2*i+1]};
      end
    end
  end

  assign count = OUT_W'(g_lvl[L].sum[0]);

endmodule
