// deca_tout_regs: the two Tile Output (TOut) registers.
//
// Each holds one decompressed 16x32 BF16 tile (1 KB). The Scaling stage writes
// W elements per vOp into the register of the Loader the vOp came from, chunk
// c covering elements c*W .. c*W+W-1 in row-major order. The core reads a
// whole 64-byte row per access (one AMX tile row). A per-register valid flag
// is set when the tile's last chunk has been written and cleared when the
// core releases the register or the tile is squashed.
//
// Interface: wr_en/wr_sel/wr_chunk/wr_data; set_valid[k] (with or after the
// last write), clr[k]; rd_sel/rd_row -> rd_data (combinational); valid[k].
//
// Two TOut registers of 1 KB follow the paper; the row read port and the valid
// flag protocol are this design's choices.
module deca_tout_regs #(
  parameter int unsigned W = 32
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        wr_en,
  input  logic                        wr_sel,
  input  logic [$clog2(deca_pkg::TILE_ELEMS/W)-1:0] wr_chunk,
  input  deca_pkg::bf16_t [W-1:0]     wr_data,
  input  logic [1:0]                  set_valid,
  input  logic [1:0]                  clr,
  input  logic                        rd_sel,
  input  logic [3:0]                  rd_row,
  output deca_pkg::bf16_t [deca_pkg::ROW_ELEMS-1:0] rd_data,
  output logic [1:0]                  valid
);
  import deca_pkg::*;

  localparam int unsigned NCH = TILE_ELEMS / W;

  bf16_t [W-1:0] tile [2][NCH];

  always_ff @(posedge clk) begin
    if (wr_en) tile[wr_sel][wr_chunk] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) valid <= '0;
    else        valid <= (valid | set_valid) & ~clr;
  end

  // row r = elements r*32 .. r*32+31
  always_comb begin
    for (int e = 0; e < ROW_ELEMS; e++) begin
      int unsigned g;
      g = int'(rd_row) * ROW_ELEMS + e;
      rd_data[e] = tile[rd_sel][g / W][g % W];
    end
  end
endmodule
