// tb_deca_top: end-to-end test of one core's DECA with its TEPL queue, at the
// default (paper) parameters W = 32, L = 8.
//
// A core model configures the DECA through its control registers, loads the
// dequantization table, and runs batches of TEPLs on compressed tiles kept in
// a behavioural L2 (random latency, out-of-order responses). Some TEPLs get
// their source value late (wake-up). For every tile written back, the 16 rows
// of the TOut register are compared with the tile computed by the reference
// generator. Schemes covered: 8-bit dense (BF8), 8-bit at 20% and 5% density,
// 4-bit with 32-element groups and E8M0 scales (MXFP4), 4-bit sparse with
// scales, 7-bit dense, BF16 at 30% density (LUT bypass). A pipeline flush in
// the middle of a batch squashes in-flight tiles, which are then re-issued.
// Mechanisms counted (each must occur): dequantization bubbles, vOp data
// stalls, TEPL structural-hazard stalls, squashes, prefetches, each LUT mode,
// LUT read-back (the state saved on a context switch),
// scaling, expansion.
module tb_deca_top;
  import deca_pkg::*;
  import deca_tb_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic mmio_wr_en; logic [9:0] mmio_wr_addr; logic [31:0] mmio_wr_data;
  logic [9:0] mmio_rd_addr; logic [31:0] mmio_rd_data;
  logic alloc_valid, alloc_ready, alloc_src_ready; logic [3:0] alloc_dst; logic [5:0] alloc_src;
  tile_meta_t alloc_meta, wake_meta;
  logic wake_valid; logic [5:0] wake_src; logic flush;
  logic wb_valid, wb_port, wb_ack; logic [3:0] wb_dst;
  logic tout_rd_sel; logic [3:0] tout_rd_row; bf16_t [ROW_ELEMS-1:0] tout_rd_data;
  logic mem_req_valid, mem_req_ready, mem_resp_valid; mem_req_t mem_req; mem_resp_t mem_resp;
  logic [5:0] mshr_occ;
  logic ev_vop, ev_bubble, ev_stall, ev_port_stall;

  deca_top dut (.*);

  deca_mem_model #(.MIN_LAT(4), .MAX_LAT(40), .MAX_OUT(24)) mem (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req(mem_req),
    .resp_valid(mem_resp_valid), .resp(mem_resp), .mshr_occ
  );

  // event counters
  int n_vop = 0, n_bubble = 0, n_stall = 0, n_port_stall = 0, n_squash = 0;
  int n_mode8 = 0, n_mode7 = 0, n_mode4 = 0, n_bypass = 0, n_scaled = 0, n_sparse = 0;
  always @(posedge clk) if (rst_n) begin
    n_vop        += int'(ev_vop);
    n_bubble     += int'(ev_bubble);
    n_stall      += int'(ev_stall);
    n_port_stall += int'(ev_port_stall);
    if (flush && (dut.squash != 2'b00)) n_squash++;
  end

  bf16_t table_q [256];
  ctile_t tiles [16];
  bit     tile_done [16];
  int     cur_q, cur_density;

  task automatic mmio(input logic [9:0] a, input logic [31:0] d);
    @(negedge clk);
    mmio_wr_en = 1'b1; mmio_wr_addr = a; mmio_wr_data = d;
    @(negedge clk);
    mmio_wr_en = 1'b0;
  endtask

  task automatic configure(input int q, input bit sparse, input bit scale, input int glog2);
    for (int i = 0; i < 256; i++) table_q[i] = rand_bf16();
    for (int n = 0; n < 256; n++) mmio(10'h100 + 10'(n), 32'(lut_entry(q, n, table_q)));
    mmio(10'h000, {16'd0, 4'(glog2), 2'b00, scale, sparse, 3'b000, 5'(q)});
    // the table reads back as written (state saved on a context switch)
    for (int n = 0; n < 256; n += 31) begin
      mmio_rd_addr = 10'h100 + 10'(n);
      #1;
      checks++;
      if (mmio_rd_data[15:0] != lut_entry(q, n, table_q)) begin
        failures++; $display("FAIL LUT read-back entry %0d", n);
      end
    end
    mmio_rd_addr = 10'h000;
    @(negedge clk);
    checks++;
    if (mmio_rd_data[4:0] != 5'(q) || mmio_rd_data[8] != sparse || mmio_rd_data[9] != scale) begin
      failures++;
      $display("FAIL config readback %h", mmio_rd_data);
    end
  endtask

  function automatic tile_meta_t place(input int t);
    tile_meta_t m;
    m.data_base = addr_t'(48'h10_0000 + t * 48'h800);
    m.bm_base   = addr_t'(48'h20_0000 + t * 48'h40);
    m.sf_base   = addr_t'(48'h30_0000 + t * 48'h40);
    m.data_len  = len_t'(tiles[t].data_len);
    m.bm_len    = len_t'(tiles[t].bm_len);
    m.sf_len    = len_t'(tiles[t].sf_len);
    return m;
  endfunction

  task automatic build(input int n, input int q, input int dens, input bit scale, input int glog2);
    for (int t = 0; t < n; t++) begin
      tile_meta_t m;
      make_tile(tiles[t], q, dens, scale, glog2, table_q);
      m = place(t);
      mem.write_bytes(m.data_base, tiles[t].data, tiles[t].data_len);
      if (tiles[t].bm_len > 0) mem.write_bytes(m.bm_base, tiles[t].bm, 64);
      if (tiles[t].sf_len > 0) mem.write_bytes(m.sf_base, tiles[t].sf, tiles[t].sf_len);
      tile_done[t] = 0;
    end
  endtask

  // core side: copy finished tiles and compare
  task automatic writeback_one();
    int t, bad;
    t = int'(wb_dst);
    bad = 0;
    for (int r = 0; r < 16; r++) begin
      tout_rd_sel = wb_port; tout_rd_row = 4'(r);
      #1;
      for (int e = 0; e < 32; e++) begin
        if (tout_rd_data[e] !== tiles[t].expect_tile[r * 32 + e]) begin
          if (bad < 4) $display("FAIL tile %0d elem %0d got %h exp %h", t, r * 32 + e,
                                tout_rd_data[e], tiles[t].expect_tile[r * 32 + e]);
          bad++;
        end
      end
    end
    checks++;
    if (bad != 0) failures++;
    if (tile_done[t]) begin failures++; $display("FAIL tile %0d written back twice", t); end
    tile_done[t] = 1;
    wb_ack = 1'b1;
    @(posedge clk);
    @(negedge clk);
    wb_ack = 1'b0;
  endtask

  task automatic alloc(input int t, input bit late);
    while (!alloc_ready) @(negedge clk);
    alloc_valid = 1'b1; alloc_dst = 4'(t); alloc_src = 6'(t);
    alloc_src_ready = !late; alloc_meta = place(t);
    @(negedge clk);
    alloc_valid = 1'b0;
  endtask

  task automatic wake(input int t);
    wake_valid = 1'b1; wake_src = 6'(t); wake_meta = place(t);
    @(negedge clk);
    wake_valid = 1'b0;
  endtask

  task automatic run_batch(input int n, input int q, input int dens, input bit scale,
                           input int glog2, input bit do_flush);
    int done_cnt, guard;
    configure(q, dens < 100, scale, glog2);
    build(n, q, dens, scale, glog2);
    fork
      begin
        for (int t = 0; t < n; t++) begin
          alloc(t, (t % 3) == 2);
          if ((t % 3) == 2) begin repeat (5) @(negedge clk); wake(t); end
        end
      end
    join
    if (do_flush) begin
      // let the first tiles get under way, then squash everything
      guard = 0;
      while (n_vop == 0 || dut.u_pe.ord_v0 == 1'b0) begin @(negedge clk); guard++; end
      repeat (3) @(negedge clk);
      flush = 1'b1;
      @(negedge clk);
      flush = 1'b0;
      repeat (50) @(negedge clk);   // stale responses drain
      for (int t = 0; t < n; t++) alloc(t, 1'b0);
    end
    done_cnt = 0;
    guard = 0;
    while (done_cnt < n && guard < 200000) begin
      @(negedge clk);
      guard++;
      if (wb_valid) begin writeback_one(); done_cnt++; end
    end
    checks++;
    if (done_cnt != n) begin failures++; $display("FAIL batch q=%0d: %0d of %0d tiles", q, done_cnt, n); end
    if (q == 16) n_bypass++; else if (q == 8) n_mode8++; else if (q == 7) n_mode7++; else n_mode4++;
    if (scale) n_scaled++;
    if (dens < 100) n_sparse++;
    $display("batch q=%0d density=%0d%% scale=%0d: %0d tiles, %0d cycles", q, dens, scale, n, guard);
  endtask

  initial begin
    mmio_wr_en = 0; mmio_wr_addr = 0; mmio_wr_data = 0; mmio_rd_addr = 0;
    alloc_valid = 0; alloc_dst = 0; alloc_src = 0; alloc_src_ready = 0; alloc_meta = '0;
    wake_valid = 0; wake_src = 0; wake_meta = '0; flush = 0; wb_ack = 0;
    tout_rd_sel = 0; tout_rd_row = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    run_batch(6, 8, 100, 1'b0, 5, 1'b0);   // BF8 dense
    run_batch(6, 8, 20,  1'b0, 5, 1'b0);   // BF8 20%
    run_batch(6, 8, 5,   1'b0, 5, 1'b0);   // BF8 5%
    run_batch(6, 4, 100, 1'b1, 5, 1'b0);   // MXFP4
    run_batch(4, 4, 50,  1'b1, 6, 1'b1);   // 4-bit sparse, scaled, with a flush
    run_batch(4, 7, 100, 1'b0, 5, 1'b0);   // 7-bit dense
    run_batch(6, 16, 30, 1'b0, 5, 1'b0);   // BF16 30%

    $display("events: vops=%0d bubbles=%0d data_stalls=%0d port_stalls=%0d squashes=%0d prefetches=%0d",
             n_vop, n_bubble, n_stall, n_port_stall, n_squash, mem.n_prefetch);
    checks++; if (n_bubble == 0)     begin failures++; $display("FAIL no bubble"); end
    checks++; if (n_stall == 0)      begin failures++; $display("FAIL no data stall"); end
    checks++; if (n_port_stall == 0) begin failures++; $display("FAIL no structural hazard"); end
    checks++; if (n_squash == 0)     begin failures++; $display("FAIL no squash"); end
    checks++; if (mem.n_prefetch == 0) begin failures++; $display("FAIL no prefetch"); end
    checks++; if (n_mode8 == 0 || n_mode7 == 0 || n_mode4 == 0 || n_bypass == 0) begin
      failures++; $display("FAIL a LUT mode not exercised"); end
    checks++; if (n_scaled == 0 || n_sparse == 0) begin failures++; $display("FAIL scaling/expansion not exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
