// deca_prefix_sum: expansion-index generator of the bitmask path.
//
// For each dense lane j of a vOp it computes idx[j] = number of ones in
// mask[j-1:0] (an exclusive prefix sum of 1-bit values). If mask[j] is one,
// lane j of the dense output takes element idx[j] of the sparse (SD) register.
// Built as a Kogge-Stone style log-depth scan on small counters. A DECA has
// one per Loader so that a tile's indices are ready before its vOps reach the
// Expansion stage.
//
// Interface: mask (W bits) -> idx (W indices of clog2(W) bits). Combinational.
//
// The paper names the parallel prefix sum and its output; the scan structure
// is this design's choice.
module deca_prefix_sum #(
  parameter int unsigned W = 32
) (
  input  logic [W-1:0]                 mask,
  output logic [W-1:0][$clog2(W)-1:0]  idx
);
  localparam int unsigned SW = $clog2(W + 1);
  localparam int unsigned ST = $clog2(W);

  logic [ST:0][W-1:0][SW-1:0] s;   // inclusive scan, level by level

  for (genvar j = 0; j < W; j++) begin : g_lvl0
    assign s[0][j] = SW'(mask[j]);
  end
  for (genvar l = 0; l < ST; l++) begin : g_lvl
    for (genvar j = 0; j < W; j++) begin : g_lane
      if (j >= (1 << l)) begin : g_add
        assign s[l+1][j] = s[l][j] + s[l][j - (1 << l)];
      end else begin : g_pass
        assign s[l+1][j] = s[l][j];
      end
    end
  end
  // exclusive = inclusive - own bit
  for (genvar j = 0; j < W; j++) begin : g_out
    assign idx[j] = ($clog2(W))'(s[ST][j] - SW'(mask[j]));
  end
endmodule
