// deca_lut_array: the dequantization LUT array.
//
// L "big" LUTs, each holding 256 BF16 values (one per 8-bit code), all loaded
// with the same table so that up to L codes can be translated per cycle. Each
// big LUT is split into four 64-entry sub-LUTs with one read port each, which
// lets a big LUT serve more than one lookup per cycle when codes are short:
//   8-bit codes: 1 lookup,  sub-LUT = code[7:6]
//   7-bit codes: 2 lookups, lookup k uses sub-LUT {k, code[6]}
//   <=6-bit codes: 4 lookups, lookup k uses sub-LUT k
// so Lq = L, 2L or 4L codes per cycle. For this to give the right values the
// table must be written replicated: for 7-bit codes entries 128..255 repeat
// 0..127, for 6 bits and less every 64-entry quarter repeats the table (the
// writer does this; entries a short code cannot reach are never read).
//
// Interface: write port (we, waddr = entry 0..255, wdata), broadcast to all L
// LUTs; qbits selects the lookup mode; codes[e] for lanes e = 0..4L-1, lane e
// handled by big LUT e / (Lq/L) and lookup slot e % (Lq/L); vals[e] is valid for
// e < Lq. raddr/rdata read entry raddr back from big LUT 0 (for saving the
// table on a context switch). Reads are combinational, writes take effect at
// the clock edge.
//
// The LUT count, size, sub-LUT split and the 1/2/4 lookups per LUT follow the
// paper; broadcast writes and the lane-to-LUT mapping are this design's choices.
module deca_lut_array #(
  parameter int unsigned L = 8
) (
  input  logic                      clk,
  input  logic                      we,
  input  logic [7:0]                waddr,
  input  deca_pkg::bf16_t           wdata,
  input  logic [7:0]                raddr,
  output deca_pkg::bf16_t           rdata,
  input  logic [4:0]                qbits,
  input  logic [4*L-1:0][7:0]       codes,
  output deca_pkg::bf16_t [4*L-1:0] vals
);
  import deca_pkg::*;

  bf16_t sub [L][4][64];

  assign rdata = sub[0][raddr[7:6]][raddr[5:0]];

  always_ff @(posedge clk) begin
    if (we) begin
      for (int b = 0; b < L; b++) sub[b][waddr[7:6]][waddr[5:0]] <= wdata;
    end
  end

  // which lookup slot owns sub-LUT s, and with which address
  always_comb begin
    vals = '0;
    for (int b = 0; b < L; b++) begin
      for (int s = 0; s < 4; s++) begin
        logic [7:0] c;
        if (qbits >= 5'd8) begin
          // one lookup (lane b); the sub-LUT is picked by the code's top bits
          c = codes[b];
          if (c[7:6] == 2'(s)) vals[b] = sub[b][s][c[5:0]];
        end else if (qbits == 5'd7) begin
          // two lookups: slot s[1] reads its code's half given by bit 6
          c = codes[2*b + (s >> 1)];
          if (c[6] == s[0]) vals[2*b + (s >> 1)] = sub[b][s][c[5:0]];
        end else begin
          c = codes[4*b + s];
          vals[4*b + s] = sub[b][s][c[5:0]];
        end
      end
    end
  end
endmodule
