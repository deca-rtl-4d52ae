// tb_deca_prefetcher: feeds tile metadata with a fixed address step. No
// prefetch may be sent n0 the step is confirmed; afterwards the prefetched
// lines must be exactly those of the tile `dist` steps ahead (bitmask, scales,
// data). With low MSHR occupancy the distance grows to MAX_DIST; with high
// occupancy prefetching stops and the distance shrinks.
module tb_deca_prefetcher;
  import deca_pkg::*;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic observe, pf_valid, pf_ready; tile_meta_t meta; logic [5:0] mshr_occ;
  addr_t pf_addr; logic [2:0] pf_dist;
  int checks = 0, failures = 0, n_pf = 0;
  addr_t expq [$];
  deca_prefetcher #(.MAX_DIST(4), .MSHR_W(6), .MSHR_LOW(16), .MSHR_HIGH(40)) dut (.*);

  function automatic tile_meta_t tile(input int t);
    return '{data_base: addr_t'(48'h10_0000 + t * 48'h400), data_len: 16'd200,
             bm_base: addr_t'(48'h20_0000 + t * 48'h40), bm_len: 16'd64,
             sf_base: addr_t'(48'h30_0000 + t * 48'h40), sf_len: 16'd16};
  endfunction

  always @(posedge clk) if (pf_valid && pf_ready) begin
    n_pf++;
    checks++;
    if (expq.size() == 0 || pf_addr != expq[0]) begin
      failures++; if (failures < 5) $display("FAIL prefetch %h", pf_addr);
    end
    if (expq.size() != 0) void'(expq.pop_front());
  end

  task automatic obs(input int t, input int d_expect, input int occ = 0);
    tile_meta_t p;
    @(negedge clk); meta = tile(t); observe = 1; mshr_occ = 6'(occ);
    @(negedge clk); observe = 0;
    checks++;
    if (int'(pf_dist) != d_expect) begin failures++; $display("FAIL dist %0d exp %0d", pf_dist, d_expect); end
    if (t >= 2 && mshr_occ < 40) begin
      expq.delete();
      p = tile(t + d_expect);
      expq.push_back(p.bm_base);
      expq.push_back(p.sf_base);
      for (int l = 0; l < 4; l++) expq.push_back(p.data_base + addr_t'(64 * l));
    end
    repeat (12) @(negedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL %0d prefetches missing", expq.size()); end
  endtask

  initial begin
    observe = 0; meta = '0; mshr_occ = 0; pf_ready = 1;
    #12 rst_n = 1;
    obs(0, 2); obs(1, 3);
    checks++; if (n_pf != 0) begin failures++; $display("FAIL prefetch n0 confident"); end
    obs(2, 4); obs(3, 4); obs(4, 4);
    begin
      int n0;
      n0 = n_pf;
      obs(5, 3, 45);   // congested: no prefetches, distance shrinks
      checks++; if (n_pf != n0) begin failures++; $display("FAIL prefetch while throttled"); end
    end
    obs(6, 3, 20);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
