// deca_xbar: the Expansion-stage crossbar.
//
// De-sparsifies one vOp: dense lane j takes sparse element idx[j] of the SD
// register when bitmask bit j is one, and BF16 zero otherwise. idx comes from
// the parallel prefix sum of the same bitmask chunk, so the k-th one in the
// mask receives the k-th nonzero. Combinational; the caller registers the
// result into the Dense Dequantized (DD) register.
//
// Interface: sd[W], mask[W], idx[W] -> dd[W].
//
// The crossbar and its control by expansion indices follow the paper; it is
// written as W independent W:1 multiplexers.
module deca_xbar #(
  parameter int unsigned W = 32
) (
  input  deca_pkg::bf16_t [W-1:0]        sd,
  input  logic [W-1:0]                   mask,
  input  logic [W-1:0][$clog2(W)-1:0]    idx,
  output deca_pkg::bf16_t [W-1:0]        dd
);
  always_comb begin
    for (int j = 0; j < W; j++) dd[j] = mask[j] ? sd[idx[j]] : 16'h0000;
  end
endmodule
