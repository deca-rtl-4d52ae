// deca_pe: one DECA, the near-core decompression accelerator of a CPU core.
//
// What it does: the core hands it the metadata of a compressed weight tile
// (base and length of the packed Q-bit nonzero array, the bitmask and the
// per-group scale factors); the DECA fetches these through the L2, rebuilds
// the dense 16x32 BF16 tile and leaves it in a TOut register for the core's
// matrix unit.
//
// How: two Loaders (LDQ + prefetcher) each own a set of input queues (SQQ,
// Bitmask Queue, Scale Factor Queue), a POPCNT and a parallel prefix sum, and
// a TOut register. One shared three-stage vector pipeline serves one Loader's
// tile at a time, in invocation order, so the other Loader can fetch while
// the pipeline works and the core can read the other TOut. A tile is 512/W
// vOps; vOp v produces dense elements v*W .. v*W+W-1:
//   issue      when the head tile's bitmask chunk, the Wnd = popcount(mask)
//              codes of its window and (if scaling) its group's scale are in
//              the queues and the Dequantization stage can take it;
//   Dequant    ceil(Wnd/Lq) cycles through the LUT array into SD;
//   Expansion  crossbar driven by the prefix sum into DD (skipped when
//              sparsity is off: the mask is taken as all ones);
//   Scaling    W BF16 multipliers by the group scale into TOut (skipped when
//              scaling is off).
// After the last vOp of a tile is issued, that Loader's LDQ and queues are
// cleared (dropping line padding) and the pipeline moves to the next tile
// without a gap. The TOut valid flag rises when the last chunk is written; the
// core reads rows and then releases the Loader. squash[k] aborts Loader k's
// tile in any state.
//
// Interface: MMIO control registers (deca_ctrl_regs map); invocation
// cmd_valid/cmd_ready/cmd_lid/cmd_meta (Loader must be idle); squash[1:0];
// done[1:0] = TOut valid; release[1:0]; TOut row read port; one L2 request
// port (round-robin between Loaders) and response port routed by tag bit 7;
// L2 MSHR occupancy for the prefetchers; event pulses for bubbles, data
// stalls and issued vOps.
//
// Follows the paper: two Loaders with LDQ/PF and duplicated queues, bitmask
// logic and TOut; the single three-stage pipeline with SD/DD/TOut registers;
// L big LUTs; W elements per vOp; bubbles when Wnd > Lq; in-order vOps that
// enter when their data has arrived and the first stage is free; squash
// aborting a tile in any state. This design's own choices: queue depths,
// MMIO map, scale factors as 8-bit exponents (MX style) with group size a
// power of two of at least W, 64-byte aligned structure bases, and the
// clear-at-last-issue rule. Not built: the integer (I8) output format the
// matrix unit could also take; TOut always holds BF16.
// Lint note: the simulator flags rst_n as used both asynchronously and synchronously: the
// synchronous use is the disable condition of assertions in the blocks it
// instantiates, not logic.
module deca_pe #(
  parameter int unsigned W           = deca_pkg::W_DEF,
  parameter int unsigned L           = deca_pkg::L_DEF,
  parameter int unsigned SQQ_LINES   = 8,
  parameter int unsigned BMQ_LINES   = 2,
  parameter int unsigned SFQ_LINES   = 1,
  parameter int unsigned LDQ_ENTRIES = 16,
  parameter int unsigned MSHR_W      = 6
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // control registers
  input  logic                  mmio_wr_en,
  input  logic [9:0]            mmio_wr_addr,
  input  logic [31:0]           mmio_wr_data,
  input  logic [9:0]            mmio_rd_addr,
  output logic [31:0]           mmio_rd_data,
  // invocation
  input  logic                  cmd_valid,
  output logic                  cmd_ready,
  input  logic                  cmd_lid,
  input  deca_pkg::tile_meta_t  cmd_meta,
  input  logic [1:0]            squash,
  output logic [1:0]            done,
  input  logic [1:0]            release_tile,
  // TOut read by the core
  input  logic                  tout_rd_sel,
  input  logic [3:0]            tout_rd_row,
  output deca_pkg::bf16_t [deca_pkg::ROW_ELEMS-1:0] tout_rd_data,
  // L2
  output logic                  mem_req_valid,
  input  logic                  mem_req_ready,
  output deca_pkg::mem_req_t    mem_req,
  input  logic                  mem_resp_valid,
  input  deca_pkg::mem_resp_t   mem_resp,
  input  logic [MSHR_W-1:0]     mshr_occ,
  // events
  output logic                  ev_vop,
  output logic                  ev_bubble,
  output logic                  ev_stall
);
  import deca_pkg::*;

  localparam int unsigned NV   = TILE_ELEMS / W;     // vOps per tile
  localparam int unsigned VW   = $clog2(NV);
  localparam int unsigned NW   = $clog2(W + 1);
  localparam int unsigned IW   = $clog2(W);
  localparam int unsigned WINB = 16 * W;
  localparam int unsigned CB   = $clog2(WINB + 1);
  // sideband through the dequant stage: vop index, mask, indices, scale
  localparam int unsigned SB_W = VW + W + W * IW + 16;

  typedef enum logic [1:0] {LD_IDLE, LD_RUN, LD_DONE} ld_state_e;

  // ---------------- control registers ----------------
  deca_cfg_t cfg;
  logic      lut_we;
  logic [7:0] lut_waddr;
  bf16_t     lut_wdata;
  logic [7:0] lut_raddr;
  bf16_t     lut_rdata;
  ld_state_e st [2];
  logic [1:0] tout_valid;
  logic [3:0] status;

  assign status = {tout_valid, st[1] != LD_IDLE, st[0] != LD_IDLE};

  deca_ctrl_regs u_ctrl (
    .clk, .rst_n, .wr_en(mmio_wr_en), .wr_addr(mmio_wr_addr), .wr_data(mmio_wr_data),
    .rd_addr(mmio_rd_addr), .rd_data(mmio_rd_data), .status, .cfg,
    .lut_we, .lut_waddr, .lut_wdata, .lut_raddr, .lut_rdata
  );

  // ---------------- per-loader resources ----------------
  logic [1:0]       start, ld_kill, qflush, ld_busy;
  logic [1:0]       lreq_valid, lreq_ready;
  mem_req_t         lreq [2];
  logic [1:0]       p_data, p_bm, p_sf, r_data, r_bm, r_sf;
  line_t            p_line [2];
  logic [WINB-1:0]  sqq_win [2];
  logic [15:0]      sqq_avail [2], bmq_avail [2], sfq_avail [2];
  logic [W-1:0]     bmq_win [2];
  logic [7:0]       sfq_win [2];
  logic [1:0]       sqq_cons, bmq_cons, sfq_cons;
  logic [CB-1:0]    sqq_bits;
  logic [W-1:0]     mask [2];
  logic [NW-1:0]    wnd [2];
  logic [W-1:0][IW-1:0] eidx [2];
  logic [15:0]      head_unused [2];
  logic [2:0]       pf_dist [2];
  logic [1:0]       resp_to;

  for (genvar k = 0; k < 2; k++) begin : g_ld
    assign resp_to[k] = mem_resp_valid && (mem_resp.tag[TAG_W-1] == 1'(k));

    deca_loader #(.LOADER_ID(1'(k)), .LDQ_ENTRIES(LDQ_ENTRIES), .MSHR_W(MSHR_W)) u_loader (
      .clk, .rst_n, .start(start[k]), .meta(cmd_meta), .kill(ld_kill[k]), .busy(ld_busy[k]),
      .mshr_occ, .req_valid(lreq_valid[k]), .req_ready(lreq_ready[k]), .req(lreq[k]),
      .resp_valid(resp_to[k]), .resp(mem_resp),
      .push_data(p_data[k]), .push_bm(p_bm[k]), .push_sf(p_sf[k]), .push_line(p_line[k]),
      .ready_data(r_data[k]), .ready_bm(r_bm[k]), .ready_sf(r_sf[k]), .pf_dist(pf_dist[k])
    );

    deca_stream_queue #(.DEPTH(SQQ_LINES), .WIN_BITS(WINB)) u_sqq (
      .clk, .rst_n, .flush(qflush[k]), .in_valid(p_data[k]), .in_ready(r_data[k]),
      .in_line(p_line[k]), .win_data(sqq_win[k]), .avail_bits(sqq_avail[k]),
      .cons_valid(sqq_cons[k]), .cons_bits(sqq_bits)
    );

    deca_stream_queue #(.DEPTH(BMQ_LINES), .WIN_BITS(W)) u_bmq (
      .clk, .rst_n, .flush(qflush[k]), .in_valid(p_bm[k]), .in_ready(r_bm[k]),
      .in_line(p_line[k]), .win_data(bmq_win[k]), .avail_bits(bmq_avail[k]),
      .cons_valid(bmq_cons[k]), .cons_bits(($clog2(W+1))'(W))
    );

    deca_stream_queue #(.DEPTH(SFQ_LINES), .WIN_BITS(8)) u_sfq (
      .clk, .rst_n, .flush(qflush[k]), .in_valid(p_sf[k]), .in_ready(r_sf[k]),
      .in_line(p_line[k]), .win_data(sfq_win[k]), .avail_bits(sfq_avail[k]),
      .cons_valid(sfq_cons[k]), .cons_bits(4'd8)
    );

    assign mask[k] = cfg.sparse_en ? bmq_win[k] : '1;

    deca_popcnt #(.W(W), .HW(16)) u_popcnt (
      .mask(mask[k]), .head(16'd0), .wnd(wnd[k]), .next_head(head_unused[k])
    );

    deca_prefix_sum #(.W(W)) u_psum (.mask(mask[k]), .idx(eidx[k]));
  end

  // ---------------- L2 request arbitration (round robin) ----------------
  logic rr;   // loader with priority
  logic gnt;
  always_comb begin
    if (lreq_valid[0] && lreq_valid[1]) gnt = rr;
    else                                gnt = lreq_valid[1];
  end
  assign mem_req_valid = |lreq_valid;
  assign mem_req       = lreq[gnt];
  assign lreq_ready[0] = mem_req_ready && (gnt == 1'b0);
  assign lreq_ready[1] = mem_req_ready && (gnt == 1'b1);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rr <= 1'b0;
    else if (mem_req_valid && mem_req_ready) rr <= ~gnt;
  end

  // ---------------- invocation order and loader state ----------------
  logic       ord_v0, ord_v1, ord0, ord1;  // head / second entry
  logic [VW:0] vcnt [2];                   // vOps issued for the tile
  logic [1:0] kill;
  logic       issue, issue_last;
  logic       hl;                          // head loader

  assign kill      = squash;
  assign cmd_ready = (st[cmd_lid] == LD_IDLE) && !ld_busy[cmd_lid] && !kill[cmd_lid];
  assign start     = {cmd_valid && cmd_ready && cmd_lid, cmd_valid && cmd_ready && !cmd_lid};
  assign hl        = ord0;

  // ---------------- vOp issue ----------------
  logic [4:0]  qb;
  logic [9:0]  need_bits;
  logic        bm_ok, sq_ok, sf_ok, can_try, grp_end;
  logic [VW-1:0] vop;
  logic        s1_ready;
  bf16_t       scale_bf;

  assign qb        = (cfg.qbits >= 5'd16) ? 5'd16 : cfg.qbits;
  assign vop       = vcnt[hl][VW-1:0];
  assign need_bits = 10'(wnd[hl]) * 10'(qb);
  assign bm_ok     = !cfg.sparse_en || (bmq_avail[hl] >= 16'(W));
  assign sq_ok     = sqq_avail[hl] >= 16'(need_bits);
  assign sf_ok     = !cfg.scale_en || (sfq_avail[hl] >= 16'd8);
  assign can_try   = ord_v0 && (st[hl] == LD_RUN) && (vcnt[hl] < (VW+1)'(NV)) && !kill[hl];
  assign issue     = can_try && bm_ok && sq_ok && sf_ok && s1_ready;
  assign issue_last = issue && (vop == VW'(NV - 1));
  // E8M0 scale -> BF16 2^(e-127)
  assign scale_bf  = {1'b0, sfq_win[hl], 7'd0};
  // the group ends with this vOp (group size >= W, power of two)
  assign grp_end   = ((((32'(vop) + 1) * W) & ((32'd1 << cfg.group_log2) - 1)) == 0) ||
                     (vop == VW'(NV - 1));

  assign ev_vop    = issue;
  assign ev_stall  = can_try && s1_ready && !(bm_ok && sq_ok && sf_ok);

  assign sqq_bits = CB'(need_bits);
  for (genvar k = 0; k < 2; k++) begin : g_cons
    assign sqq_cons[k] = issue && (hl == 1'(k));
    assign bmq_cons[k] = issue && (hl == 1'(k)) && cfg.sparse_en;
    assign sfq_cons[k] = issue && (hl == 1'(k)) && cfg.scale_en && grp_end;
    assign qflush[k]   = start[k] || kill[k] || (issue_last && hl == 1'(k));
    assign ld_kill[k]  = kill[k] || (issue_last && hl == 1'(k));
  end

  // ---------------- pipeline ----------------
  logic            sd_valid, sd_lid;
  bf16_t [W-1:0]   sd;
  logic [SB_W-1:0] s1_sb, sd_sb;
  logic            bubble;

  assign s1_sb = {vop, mask[hl], eidx[hl], scale_bf};

  deca_dequant_stage #(.W(W), .L(L), .SB_W(SB_W)) u_deq (
    .clk, .rst_n, .cfg_qbits(cfg.qbits), .lut_we, .lut_waddr, .lut_wdata, .lut_raddr, .lut_rdata, .kill,
    .in_valid(issue), .in_ready(s1_ready), .in_win(sqq_win[hl]), .in_wnd(wnd[hl]),
    .in_lid(hl), .in_sb(s1_sb), .sd_valid, .sd, .sd_lid, .sd_sb, .bubble
  );
  assign ev_bubble = bubble;

  // Expansion
  logic [VW-1:0]        sd_vop;
  logic [W-1:0]         sd_mask;
  logic [W-1:0][IW-1:0] sd_idx;
  bf16_t                sd_scale;
  bf16_t [W-1:0]        xb;
  assign {sd_vop, sd_mask, sd_idx, sd_scale} = sd_sb;

  deca_xbar #(.W(W)) u_xbar (.sd, .mask(sd_mask), .idx(sd_idx), .dd(xb));

  logic            dd_valid, dd_lid;
  bf16_t [W-1:0]   dd;
  logic [VW-1:0]   dd_vop;
  bf16_t           dd_scale;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dd_valid <= 1'b0;
      dd_lid   <= 1'b0;
      dd_vop   <= '0;
      dd_scale <= '0;
      dd       <= '0;
    end else begin
      dd_valid <= sd_valid && !kill[sd_lid];
      if (sd_valid) begin
        dd       <= xb;
        dd_lid   <= sd_lid;
        dd_vop   <= sd_vop;
        dd_scale <= sd_scale;
      end
    end
  end

  // Scaling, written straight into TOut
  bf16_t [W-1:0] scaled;
  for (genvar j = 0; j < W; j++) begin : g_mul
    bf16_t prod;
    deca_bf16_mul u_mul (.a(dd[j]), .b(dd_scale), .p(prod));
    assign scaled[j] = cfg.scale_en ? prod : dd[j];
  end

  logic       wr_en;
  logic [1:0] set_valid, clr;
  assign wr_en = dd_valid && !kill[dd_lid];
  assign set_valid = {wr_en && dd_lid && dd_vop == VW'(NV - 1),
                      wr_en && !dd_lid && dd_vop == VW'(NV - 1)};
  assign clr = kill | release_tile | start;

  deca_tout_regs #(.W(W)) u_tout (
    .clk, .rst_n, .wr_en, .wr_sel(dd_lid), .wr_chunk(dd_vop), .wr_data(scaled),
    .set_valid, .clr, .rd_sel(tout_rd_sel), .rd_row(tout_rd_row), .rd_data(tout_rd_data),
    .valid(tout_valid)
  );
  assign done = tout_valid;

  // ---------------- state ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st[0]  <= LD_IDLE;
      st[1]  <= LD_IDLE;
      vcnt[0] <= '0;
      vcnt[1] <= '0;
      ord_v0 <= 1'b0;
      ord_v1 <= 1'b0;
      ord0   <= 1'b0;
      ord1   <= 1'b0;
    end else begin
      // invocation order: pop head at its last issue or kill, remove killed
      // second entry, append new starts
      logic       v0, v1, o0, o1;
      v0 = ord_v0; v1 = ord_v1; o0 = ord0; o1 = ord1;
      if (v1 && kill[o1]) v1 = 1'b0;
      if (v0 && (kill[o0] || issue_last)) begin
        v0 = v1; o0 = o1; v1 = 1'b0;
      end
      if (start != 2'b00) begin
        if (!v0) begin v0 = 1'b1; o0 = start[1]; end
        else     begin v1 = 1'b1; o1 = start[1]; end
      end
      ord_v0 <= v0; ord_v1 <= v1; ord0 <= o0; ord1 <= o1;

      for (int k = 0; k < 2; k++) begin
        if (kill[k]) begin
          st[k] <= LD_IDLE;
        end else if (start[k]) begin
          st[k]   <= LD_RUN;
          vcnt[k] <= '0;
        end else begin
          if (issue && hl == 1'(k)) vcnt[k] <= vcnt[k] + 1'b1;
          if (set_valid[k]) st[k] <= LD_DONE;
          if (release_tile[k] && st[k] == LD_DONE) st[k] <= LD_IDLE;
        end
      end
    end
  end

  // A Loader only starts when idle.
  assert property (@(posedge clk) disable iff (!rst_n) cmd_valid && cmd_ready |-> st[cmd_lid] == LD_IDLE)
    else $error("deca_pe: start on a busy loader");
endmodule
