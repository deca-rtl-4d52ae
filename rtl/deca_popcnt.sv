// deca_popcnt: window-size counter of the bitmask path.
//
// Counts the ones in the W-bit bitmask chunk of the next vOp. The count is the
// vOp's window (Wnd): how many nonzeros it reads from the SQQ. Added to the
// current window head it gives the head of the next window, i.e. the next SQQ
// element to be read. Purely combinational; a DECA has one per Loader.
//
// Interface: mask (W bits), head (element index of the current window),
// wnd (popcount), next_head = head + wnd.
//
// The paper names the POPCNT unit and its role; the adder-tree form is this
// design's choice.
module deca_popcnt #(
  parameter int unsigned W  = 32,
  parameter int unsigned HW = 16
) (
  input  logic [W-1:0]          mask,
  input  logic [HW-1:0]         head,
  output logic [$clog2(W+1)-1:0] wnd,
  output logic [HW-1:0]         next_head
);
  always_comb begin
    wnd = '0;
    for (int i = 0; i < W; i++) wnd = wnd + $bits(wnd)'(mask[i]);
  end
  assign next_head = head + HW'(wnd);
endmodule
