// deca_top: one core's DECA together with the core-side TEPL machinery.
//
// This is the unit that would sit next to each core of the processor: the
// DECA PE (Loaders, queues, vector pipeline, TOut and control registers) and
// the TEPL queue with its two execution ports, one per DECA Loader. The core
// itself (reorder buffer, tile registers, matrix unit) and the L2 are outside:
// their signals are this module's ports.
//
// Flow of a tile: the core allocates a TEPL (alloc_*), its source value
// arrives (alloc or wake_*), the queue issues the metadata to a free Loader,
// the Loader fetches the three structures through mem_req/mem_resp, the
// pipeline decompresses the tile into that Loader's TOut, the queue raises
// wb_valid; the core reads the 16 rows (tout_rd_sel = wb_port, tout_rd_row)
// and answers wb_ack, which frees the port and the Loader. flush squashes every
// TEPL in flight. Configuration (code width, sparsity, scaling, LUT contents)
// is written through the MMIO port before use.
//
// Every parameter takes the paper's evaluated configuration (W = 32, L = 8) or
// this design's own default where the paper gives no number.
// Lint note: the simulator flags rst_n as used both asynchronously and synchronously: the
// synchronous use is the disable condition of assertions in the blocks it
// instantiates, not logic.
module deca_top #(
  parameter int unsigned W          = deca_pkg::W_DEF,
  parameter int unsigned L          = deca_pkg::L_DEF,
  parameter int unsigned TQ_ENTRIES = 8,
  parameter int unsigned DST_W      = 4,
  parameter int unsigned SRC_W      = 6,
  parameter int unsigned MSHR_W     = 6
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // control registers (privileged stores / loads)
  input  logic                  mmio_wr_en,
  input  logic [9:0]            mmio_wr_addr,
  input  logic [31:0]           mmio_wr_data,
  input  logic [9:0]            mmio_rd_addr,
  output logic [31:0]           mmio_rd_data,
  // TEPL instructions from the core pipeline
  input  logic                  alloc_valid,
  output logic                  alloc_ready,
  input  logic [DST_W-1:0]      alloc_dst,
  input  logic [SRC_W-1:0]      alloc_src,
  input  logic                  alloc_src_ready,
  input  deca_pkg::tile_meta_t  alloc_meta,
  input  logic                  wake_valid,
  input  logic [SRC_W-1:0]      wake_src,
  input  deca_pkg::tile_meta_t  wake_meta,
  input  logic                  flush,
  // tile write-back into the core's tile register
  output logic                  wb_valid,
  output logic                  wb_port,
  output logic [DST_W-1:0]      wb_dst,
  input  logic                  wb_ack,
  input  logic                  tout_rd_sel,
  input  logic [3:0]            tout_rd_row,
  output deca_pkg::bf16_t [deca_pkg::ROW_ELEMS-1:0] tout_rd_data,
  // L2 port
  output logic                  mem_req_valid,
  input  logic                  mem_req_ready,
  output deca_pkg::mem_req_t    mem_req,
  input  logic                  mem_resp_valid,
  input  deca_pkg::mem_resp_t   mem_resp,
  input  logic [MSHR_W-1:0]     mshr_occ,
  // events
  output logic                  ev_vop,
  output logic                  ev_bubble,
  output logic                  ev_stall,
  output logic                  ev_port_stall
);
  import deca_pkg::*;

  logic       cmd_valid, cmd_ready, cmd_lid;
  tile_meta_t cmd_meta;
  logic [1:0] squash, done, release_tile;

  tepl_queue #(.ENTRIES(TQ_ENTRIES), .DST_W(DST_W), .SRC_W(SRC_W)) u_tq (
    .clk, .rst_n, .alloc_valid, .alloc_ready, .alloc_dst, .alloc_src, .alloc_src_ready,
    .alloc_meta, .wake_valid, .wake_src, .wake_meta, .flush,
    .cmd_valid, .cmd_ready, .cmd_lid, .cmd_meta, .squash, .done, .release_tile,
    .wb_valid, .wb_port, .wb_dst, .wb_ack, .ev_port_stall
  );

  deca_pe #(.W(W), .L(L), .MSHR_W(MSHR_W)) u_pe (
    .clk, .rst_n, .mmio_wr_en, .mmio_wr_addr, .mmio_wr_data, .mmio_rd_addr, .mmio_rd_data,
    .cmd_valid, .cmd_ready, .cmd_lid, .cmd_meta, .squash, .done, .release_tile,
    .tout_rd_sel, .tout_rd_row, .tout_rd_data,
    .mem_req_valid, .mem_req_ready, .mem_req, .mem_resp_valid, .mem_resp, .mshr_occ,
    .ev_vop, .ev_bubble, .ev_stall
  );
endmodule
