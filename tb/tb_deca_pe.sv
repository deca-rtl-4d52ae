// tb_deca_pe: drives one DECA PE directly (no TEPL queue) with tiles held in
// the behavioural L2 model. Tiles go to both Loaders so the two tiles overlap
// in the shared pipeline. For each tile it checks all 512 output elements,
// that exactly 512/W = 16 vOps were issued, and that the number of
// dequantization bubbles equals the paper's sum over vOps of
// ceil(Wnd/Lq) - 1 (Wnd = ones in the vOp's bitmask chunk, Lq = L, 2L or 4L
// codes per cycle). A squash of one Loader in the middle of its tile must leave
// the other Loader's tile intact, and the squashed Loader must accept a new
// tile afterwards.
module tb_deca_pe;
  import deca_pkg::*;
  import deca_tb_pkg::*;
  localparam int W = 32, L = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic mmio_wr_en; logic [9:0] mmio_wr_addr; logic [31:0] mmio_wr_data;
  logic [9:0] mmio_rd_addr; logic [31:0] mmio_rd_data;
  logic cmd_valid, cmd_ready, cmd_lid; tile_meta_t cmd_meta;
  logic [1:0] squash, done, release_tile;
  logic tout_rd_sel; logic [3:0] tout_rd_row; bf16_t [ROW_ELEMS-1:0] tout_rd_data;
  logic mem_req_valid, mem_req_ready, mem_resp_valid; mem_req_t mem_req; mem_resp_t mem_resp;
  logic [5:0] mshr_occ;
  logic ev_vop, ev_bubble, ev_stall;

  deca_pe #(.W(W), .L(L)) dut (.*);
  deca_mem_model #(.MIN_LAT(4), .MAX_LAT(30), .MAX_OUT(24)) mem (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req(mem_req),
    .resp_valid(mem_resp_valid), .resp(mem_resp), .mshr_occ
  );

  // per-loader vOp / bubble counts since the loader's last command
  int vops [2], bubs [2], n_stall = 0;
  always @(posedge clk) if (rst_n) begin
    if (ev_vop)    vops[dut.hl]++;
    if (ev_bubble) bubs[dut.u_deq.lid]++;
    if (ev_stall)  n_stall++;
  end

  bf16_t tbl [256];
  ctile_t tiles [2];

  task automatic mmio(input logic [9:0] a, input logic [31:0] d);
    @(negedge clk); mmio_wr_en = 1; mmio_wr_addr = a; mmio_wr_data = d;
    @(negedge clk); mmio_wr_en = 0;
  endtask

  task automatic configure(input int q, input bit sparse, input bit scale, input int glog2);
    for (int i = 0; i < 256; i++) tbl[i] = rand_bf16();
    for (int n = 0; n < 256; n++) mmio(10'h100 + 10'(n), 32'(lut_entry(q, n, tbl)));
    mmio(10'h000, {16'd0, 4'(glog2), 2'b00, scale, sparse, 3'b000, 5'(q)});
  endtask

  function automatic tile_meta_t place(input int k);
    tile_meta_t m;
    m.data_base = addr_t'(48'h10_0000 + k * 48'h1000);
    m.bm_base   = addr_t'(48'h20_0000 + k * 48'h40);
    m.sf_base   = addr_t'(48'h30_0000 + k * 48'h40);
    m.data_len  = len_t'(tiles[k].data_len);
    m.bm_len    = len_t'(tiles[k].bm_len);
    m.sf_len    = len_t'(tiles[k].sf_len);
    return m;
  endfunction

  function automatic int exp_bubbles(input int k, input int q);
    int lq, sum;
    lq = (q == 16) ? W : (q >= 8) ? L : (q == 7) ? 2 * L : 4 * L;
    sum = 0;
    for (int v = 0; v < 512 / W; v++) begin
      int wnd;
      wnd = 0;
      for (int e = v * W; e < (v + 1) * W; e++)
        wnd += tiles[k].sparse ? int'(tiles[k].bm[e / 8][e % 8]) : 1;
      if (wnd > 0) sum += (wnd + lq - 1) / lq - 1;
    end
    return sum;
  endfunction

  task automatic send(input int k);
    @(negedge clk);
    cmd_valid = 1; cmd_lid = 1'(k); cmd_meta = place(k);
    @(posedge clk); while (!cmd_ready) @(posedge clk);
    vops[k] = 0; bubs[k] = 0;
    @(negedge clk); cmd_valid = 0;
  endtask

  task automatic check_tile(input int k, input int q);
    int bad, eb;
    bad = 0;
    for (int r = 0; r < 16; r++) begin
      tout_rd_sel = 1'(k); tout_rd_row = 4'(r); #1;
      for (int e = 0; e < 32; e++)
        if (tout_rd_data[e] !== tiles[k].expect_tile[r * 32 + e]) begin
          if (bad < 3) $display("FAIL q=%0d loader %0d elem %0d got %h exp %h", q, k, r * 32 + e,
                                tout_rd_data[e], tiles[k].expect_tile[r * 32 + e]);
          bad++;
        end
    end
    checks++; if (bad != 0) failures++;
    checks++; if (vops[k] != 512 / W) begin failures++; $display("FAIL loader %0d vops %0d", k, vops[k]); end
    eb = exp_bubbles(k, q);
    checks++; if (bubs[k] != eb) begin failures++; $display("FAIL q=%0d loader %0d bubbles %0d exp %0d", q, k, bubs[k], eb); end
    @(negedge clk); release_tile = 2'b01 << k; @(negedge clk); release_tile = 0;
  endtask

  task automatic pair(input int q, input int dens, input bit scale, input int glog2, input bit do_squash);
    int guard;
    configure(q, dens < 100, scale, glog2);
    for (int k = 0; k < 2; k++) begin
      tile_meta_t m;
      make_tile(tiles[k], q, dens, scale, glog2, tbl);
      m = place(k);
      mem.write_bytes(m.data_base, tiles[k].data, tiles[k].data_len);
      if (tiles[k].bm_len > 0) mem.write_bytes(m.bm_base, tiles[k].bm, 64);
      if (tiles[k].sf_len > 0) mem.write_bytes(m.sf_base, tiles[k].sf, tiles[k].sf_len);
    end
    send(0); send(1);
    if (do_squash) begin
      guard = 0;
      while (vops[1] < 3 && guard < 10000) begin @(negedge clk); guard++; end
      squash = 2'b10; @(negedge clk); squash = 0;
      checks++; if (done[1]) begin failures++; $display("FAIL squashed loader reports done"); end
      repeat (40) @(negedge clk);
      send(1);
    end
    for (int k = 0; k < 2; k++) begin
      guard = 0;
      while (!done[k] && guard < 20000) begin @(negedge clk); guard++; end
      checks++; if (!done[k]) begin failures++; $display("FAIL loader %0d never done", k); end
      check_tile(k, q);
    end
    $display("q=%0d density=%0d%% scale=%0d squash=%0d: bubbles %0d/%0d", q, dens, scale, do_squash, bubs[0], bubs[1]);
  endtask

  initial begin
    mmio_wr_en = 0; mmio_wr_addr = 0; mmio_wr_data = 0; mmio_rd_addr = 0;
    cmd_valid = 0; cmd_lid = 0; cmd_meta = '0; squash = 0; release_tile = 0;
    tout_rd_sel = 0; tout_rd_row = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    pair(8, 100, 0, 5, 0);
    pair(8, 40, 0, 5, 0);
    pair(8, 10, 1, 5, 1);
    pair(7, 60, 0, 5, 0);
    pair(6, 100, 1, 5, 0);
    pair(4, 100, 1, 5, 1);
    pair(3, 30, 1, 7, 0);
    pair(2, 70, 0, 5, 0);
    pair(16, 50, 0, 5, 0);
    $display("data_stalls=%0d prefetches=%0d", n_stall, mem.n_prefetch);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (300000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
