// tb_deca_workloads: the compression schemes of the evaluation, run as
// streams of 16 tiles through the top at its default parameters (W = 32,
// L = 8): Q8 (BF8) dense and at 50, 20, 10 and 5 % density, Q16 (BF16 values
// with a bitmask) at 50, 20 and 5 %, and Q4 (MXFP4: 4-bit codes, an 8-bit
// exponent per 32 weights). A core model keeps two TEPLs in flight and copies
// each finished tile; the L2 model answers in 4 to 12 cycles, as for lines the
// prefetcher has brought in. Every element of every tile is compared with the
// reference. The run time of each stream is compared with the pipeline bound,
// the sum over its vOps of max(1, ceil(Wnd/Lq)) cycles: it can never be
// lower, and for dense 8-bit tiles, whose vOps each hold the Dequantization
// stage for W/L = 4 cycles, the pipeline must be the bottleneck (within 25 %
// plus a fixed start-up). Cycles per tile and vOps per cycle are printed for
// each scheme.
module tb_deca_workloads;
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

  deca_mem_model #(.MIN_LAT(4), .MAX_LAT(12), .MAX_OUT(32)) mem (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req(mem_req),
    .resp_valid(mem_resp_valid), .resp(mem_resp), .mshr_occ
  );

  int n_vop = 0, cyc = 0;
  always @(posedge clk) begin
    cyc++;
    if (rst_n && ev_vop) n_vop++;
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

  function automatic int pipe_bound(input int n, input int q);
    int lq, sum;
    lq = (q == 16) ? 32 : (q >= 8) ? 8 : (q == 7) ? 16 : 32;
    sum = 0;
    for (int t = 0; t < n; t++)
      for (int v = 0; v < 16; v++) begin
        int wnd;
        wnd = 0;
        for (int e = v * 32; e < v * 32 + 32; e++)
          wnd += tiles[t].sparse ? int'(tiles[t].bm[e / 8][e % 8]) : 1;
        sum += (wnd <= lq) ? 1 : (wnd + lq - 1) / lq;
      end
    return sum;
  endfunction

  task automatic stream(input string name, input int q, input int dens, input bit scale);
    int n, done_cnt, t0, span, bound, v0;
    n = 16;
    configure(q, dens < 100, scale, 5);
    build(n, q, dens, scale, 5);
    bound = pipe_bound(n, q);
    t0 = cyc; v0 = n_vop;
    done_cnt = 0;
    fork
      for (int t = 0; t < n; t++) alloc(t, 1'b0);
      while (done_cnt < n && cyc - t0 < 50000) begin
        @(negedge clk);
        if (wb_valid) begin writeback_one(); done_cnt++; end
      end
    join
    span = cyc - t0;
    checks++;
    if (done_cnt != n || n_vop - v0 != 16 * n) begin
      failures++; $display("FAIL %s: %0d tiles, %0d vOps", name, done_cnt, n_vop - v0);
    end
    checks++;
    if (span < bound) begin failures++; $display("FAIL %s faster than the pipeline bound", name); end
    if (q == 8 && dens == 100) begin
      checks++;
      if (span > bound + bound / 4 + 100) begin
        failures++; $display("FAIL %s not pipeline-bound: %0d cycles, bound %0d", name, span, bound);
      end
    end
    $display("%-10s %3d%%: %5d cycles for %0d tiles (%0d.%01d per tile), pipeline bound %0d, %0d.%02d vOps/cycle",
             name, dens, span, n, span / n, (span * 10 / n) % 10, bound,
             (16 * n) / span, ((16 * n * 100) / span) % 100);
  endtask

  initial begin
    mmio_wr_en = 0; mmio_wr_addr = 0; mmio_wr_data = 0; mmio_rd_addr = 0;
    alloc_valid = 0; alloc_dst = 0; alloc_src = 0; alloc_src_ready = 0; alloc_meta = '0;
    wake_valid = 0; wake_src = 0; wake_meta = '0; flush = 0; wb_ack = 0;
    tout_rd_sel = 0; tout_rd_row = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    stream("Q8", 8, 100, 1'b0);
    stream("Q8", 8, 50, 1'b0);
    stream("Q8", 8, 20, 1'b0);
    stream("Q8", 8, 10, 1'b0);
    stream("Q8", 8, 5, 1'b0);
    stream("Q16", 16, 50, 1'b0);
    stream("Q16", 16, 20, 1'b0);
    stream("Q16", 16, 5, 1'b0);
    stream("Q4 MXFP4", 4, 100, 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (600000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
