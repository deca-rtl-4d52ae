// deca_loader: one DECA Loader, a Load Queue (LDQ) plus a prefetcher (PF).
//
// The LDQ fetches the tile it was started with; the PF watches the same start
// pulses and sends prefetches for predicted future tiles. Both share the
// Loader's single request port towards the L2: a demand load always wins, a
// prefetch goes out only in cycles without one. A kill (squash) stops the LDQ
// but leaves the prefetcher's history alone, since prefetches do not change
// architectural state.
//
// Interface: start/meta/kill/busy; req_valid/req_ready/req (mem_req_t, with
// req.prefetch set on prefetches); resp_valid/resp; the LDQ's three queue
// push ports; mshr_occ for the PF.
//
// The paper defines a Loader as an LDQ and a PF; the fixed demand-first
// arbitration is this design's choice.
// Lint note: the simulator flags rst_n as used both asynchronously and synchronously: the
// synchronous use is the disable condition of assertions in the blocks it
// instantiates, not logic.
module deca_loader #(
  parameter bit          LOADER_ID   = 1'b0,
  parameter int unsigned LDQ_ENTRIES = 16,
  parameter int unsigned MSHR_W      = 6
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  deca_pkg::tile_meta_t  meta,
  input  logic                  kill,
  output logic                  busy,
  input  logic [MSHR_W-1:0]     mshr_occ,
  output logic                  req_valid,
  input  logic                  req_ready,
  output deca_pkg::mem_req_t    req,
  input  logic                  resp_valid,
  input  deca_pkg::mem_resp_t   resp,
  output logic                  push_data,
  output logic                  push_bm,
  output logic                  push_sf,
  output deca_pkg::line_t       push_line,
  input  logic                  ready_data,
  input  logic                  ready_bm,
  input  logic                  ready_sf,
  output logic [2:0]            pf_dist
);
  import deca_pkg::*;

  logic  ld_valid, ld_ready, pf_valid, pf_ready;
  addr_t ld_addr, pf_addr;
  logic [TAG_W-1:0] ld_tag;

  deca_ldq #(.ENTRIES(LDQ_ENTRIES), .LOADER_ID(LOADER_ID)) u_ldq (
    .clk, .rst_n, .start, .meta, .kill, .busy,
    .req_valid(ld_valid), .req_ready(ld_ready), .req_addr(ld_addr), .req_tag(ld_tag),
    .resp_valid, .resp,
    .push_data, .push_bm, .push_sf, .push_line,
    .ready_data, .ready_bm, .ready_sf
  );

  deca_prefetcher #(.MSHR_W(MSHR_W)) u_pf (
    .clk, .rst_n, .observe(start), .meta, .mshr_occ,
    .pf_valid, .pf_ready, .pf_addr, .pf_dist
  );

  assign req_valid = ld_valid || pf_valid;
  assign ld_ready  = req_ready;
  assign pf_ready  = req_ready && !ld_valid;
  always_comb begin
    if (ld_valid) req = '{addr: ld_addr, prefetch: 1'b0, tag: ld_tag};
    else          req = '{addr: pf_addr, prefetch: 1'b1, tag: TAG_W'({LOADER_ID, 7'd0})};
  end
endmodule
