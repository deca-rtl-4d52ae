// tepl_queue: the core-side TEPL queue and its two TEPL execution ports.
//
// TEPL (tile external preprocess and load) is an instruction that passes a
// tile's metadata (from a source register) to a DECA Loader and completes
// when the decompressed tile lands in a destination tile register. Entries are
// allocated as TEPLs enter the reorder buffer. An entry whose source value is
// available is issued, oldest first and out of program order with respect to
// other instructions, to a free execution port; port k leads to DECA Loader k.
// With both ports busy the remaining TEPLs wait (the structural hazard that
// keeps at most two tiles in flight). When Loader k reports its TOut valid the
// queue asks the core to copy the tile into the entry's destination register
// (wb_valid/wb_port/wb_dst); on wb_ack the entry retires, the port is freed
// and the Loader is released. A pipeline flush removes every entry and sends
// a squash to each busy port's Loader; the core may then re-issue the TEPLs.
//
// Interface: alloc_* (with the source tag, and its value when already
// available), wake_* (source value broadcast), flush; DECA side cmd_valid/
// cmd_ready/cmd_lid/cmd_meta, squash, done, release_tile; core side wb_*;
// ev_port_stall (a ready entry found no free port this cycle).
// Timing: issue the cycle after the entry becomes ready at the earliest.
//
// The queue, two ports, out-of-order speculative issue, the two-TEPL limit
// and squash-on-flush are the paper's. Queue size, oldest-first selection,
// the wake-up broadcast and the write-back handshake are this design's.
// Lint note: the simulator flags rst_n as used both asynchronously and synchronously: the
// synchronous use is the assertions' disable condition, not logic.
module tepl_queue #(
  parameter int unsigned ENTRIES = 8,
  parameter int unsigned DST_W   = 4,
  parameter int unsigned SRC_W   = 6
) (
  input  logic                  clk,
  input  logic                  rst_n,
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
  output logic                  cmd_valid,
  input  logic                  cmd_ready,
  output logic                  cmd_lid,
  output deca_pkg::tile_meta_t  cmd_meta,
  output logic [1:0]            squash,
  input  logic [1:0]            done,
  output logic [1:0]            release_tile,
  output logic                  wb_valid,
  output logic                  wb_port,
  output logic [DST_W-1:0]      wb_dst,
  input  logic                  wb_ack,
  output logic                  ev_port_stall
);
  import deca_pkg::*;

  localparam int unsigned EW = $clog2(ENTRIES);

  typedef struct packed {
    logic              valid;
    logic              ready;
    logic              issued;
    logic [DST_W-1:0]  dst;
    logic [SRC_W-1:0]  src;
    logic [7:0]        seq;
    tile_meta_t        meta;
  } ent_t;

  ent_t          q [ENTRIES];
  logic [7:0]    seq_ctr;
  logic [1:0]    port_busy;
  logic [EW-1:0] port_ent [2];

  // free slot for allocation
  logic          have_free;
  logic [EW-1:0] free_idx;
  always_comb begin
    have_free = 1'b0;
    free_idx  = '0;
    for (int i = ENTRIES - 1; i >= 0; i--) begin
      if (!q[i].valid) begin
        have_free = 1'b1;
        free_idx  = EW'(i);
      end
    end
  end
  assign alloc_ready = have_free && !flush;

  // oldest ready, not yet issued entry
  logic          have_cand;
  logic [EW-1:0] cand;
  logic [7:0]    best_age;
  always_comb begin
    have_cand = 1'b0;
    cand      = '0;
    best_age  = '0;
    for (int i = 0; i < ENTRIES; i++) begin
      logic [7:0] age;
      age = seq_ctr - q[i].seq;
      if (q[i].valid && q[i].ready && !q[i].issued && (!have_cand || age > best_age)) begin
        have_cand = 1'b1;
        cand      = EW'(i);
        best_age  = age;
      end
    end
  end

  logic free_port;
  assign free_port     = !port_busy[0] ? 1'b0 : 1'b1;
  assign cmd_valid     = have_cand && !(&port_busy) && !flush;
  assign cmd_lid       = free_port;
  assign cmd_meta      = q[cand].meta;
  assign ev_port_stall = have_cand && (&port_busy) && !flush;

  // write-back: lowest port with a finished tile
  assign wb_valid = |(port_busy & done);
  assign wb_port  = !(port_busy[0] && done[0]);
  assign wb_dst   = q[port_ent[wb_port]].dst;

  assign squash       = flush ? port_busy : 2'b00;
  assign release_tile = (wb_valid && wb_ack && !flush) ? (2'b01 << wb_port) : 2'b00;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      seq_ctr     <= '0;
      port_busy   <= '0;
      port_ent[0] <= '0;
      port_ent[1] <= '0;
      for (int i = 0; i < ENTRIES; i++) q[i] <= '0;
    end else if (flush) begin
      port_busy <= '0;
      for (int i = 0; i < ENTRIES; i++) q[i].valid <= 1'b0;
    end else begin
      // wake-up of waiting sources
      if (wake_valid) begin
        for (int i = 0; i < ENTRIES; i++) begin
          if (q[i].valid && !q[i].ready && q[i].src == wake_src) begin
            q[i].ready <= 1'b1;
            q[i].meta  <= wake_meta;
          end
        end
      end
      if (alloc_valid && alloc_ready) begin
        q[free_idx] <= '{valid: 1'b1, ready: alloc_src_ready, issued: 1'b0, dst: alloc_dst,
                         src: alloc_src, seq: seq_ctr, meta: alloc_meta};
        seq_ctr <= seq_ctr + 8'd1;
      end
      if (cmd_valid && cmd_ready) begin
        q[cand].issued       <= 1'b1;
        port_busy[free_port] <= 1'b1;
        port_ent[free_port]  <= cand;
      end
      if (wb_valid && wb_ack) begin
        q[port_ent[wb_port]].valid <= 1'b0;
        port_busy[wb_port]         <= 1'b0;
      end
    end
  end

  // At most two TEPLs are in flight.
  assert property (@(posedge clk) disable iff (!rst_n)
                   cmd_valid && cmd_ready |-> !port_busy[cmd_lid])
    else $error("tepl_queue: issue to a busy port");
endmodule
