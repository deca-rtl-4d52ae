// tb_deca_loader: a Loader (LDQ + prefetcher) fetching a run of tiles laid out
// with a fixed step. Every line of every tile must reach its queue in order;
// prefetches must appear once the step is known, must never be sent in a cycle
// with a pending demand load, and must point at a later tile's lines.
module tb_deca_loader;
  import deca_pkg::*;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic start, kill, busy, req_valid, req_ready, resp_valid;
  tile_meta_t meta; mem_req_t req; mem_resp_t resp; logic [5:0] mshr_occ; logic [2:0] pf_dist;
  logic push_data, push_bm, push_sf, ready_data, ready_bm, ready_sf; line_t push_line;
  int checks = 0, failures = 0, n_pf = 0, cur_tile = 0;
  line_t exp_q [$];
  deca_loader #(.LOADER_ID(1'b0), .LDQ_ENTRIES(16), .MSHR_W(6)) dut (.*);
  deca_mem_model #(.MIN_LAT(3), .MAX_LAT(20), .MAX_OUT(32)) mem (
    .clk, .rst_n, .req_valid, .req_ready, .req, .resp_valid, .resp, .mshr_occ);
  assign ready_data = 1'b1; assign ready_bm = 1'b1; assign ready_sf = 1'b1;

  function automatic tile_meta_t tile(input int t);
    return '{data_base: addr_t'(48'h4_0000 + t * 48'h200), data_len: 16'd256,
             bm_base: addr_t'(48'h5_0000 + t * 48'h40), bm_len: 16'd64,
             sf_base: 48'h0, sf_len: 16'd0};
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (req_valid && req_ready && req.prefetch) begin
      tile_meta_t m;
      n_pf++;
      checks++;
      if (dut.ld_valid) begin failures++; $display("FAIL prefetch beat a demand load"); end
      m = tile(cur_tile);
      checks++;
      if (!((req.addr >= m.data_base + 48'h200 && req.addr < 48'h5_0000) ||
            (req.addr >= m.bm_base + 48'h40))) begin
        failures++; $display("FAIL prefetch %h not ahead of tile %0d", req.addr, cur_tile);
      end
    end
    if (push_data || push_bm || push_sf) begin
      checks++;
      if (exp_q.size() == 0 || push_line != exp_q[0]) begin failures++; $display("FAIL line"); end
      if (exp_q.size() != 0) void'(exp_q.pop_front());
    end
  end

  initial begin
    start = 0; kill = 0; meta = '0;
    #12 rst_n = 1;
    for (int t = 0; t < 8; t++) begin
      tile_meta_t m;
      logic [7:0] b [];
      m = tile(t);
      b = new[256];
      for (int i = 0; i < 256; i++) b[i] = 8'($urandom);
      mem.write_bytes(m.data_base, b, 256);
      for (int i = 0; i < 64; i++) b[i] = 8'($urandom);
      mem.write_bytes(m.bm_base, b, 64);
      exp_q.push_back(mem.lines[m.bm_base]);
      for (int l = 0; l < 4; l++) exp_q.push_back(mem.lines[m.data_base + addr_t'(64 * l)]);
    end
    for (int t = 0; t < 8; t++) begin
      @(negedge clk); meta = tile(t); start = 1; cur_tile = t;
      @(negedge clk); start = 0;
      while (busy) @(negedge clk);
    end
    checks++; if (exp_q.size() != 0) begin failures++; $display("FAIL lines missing"); end
    checks++; if (n_pf == 0) begin failures++; $display("FAIL no prefetches"); end
    $display("prefetches=%0d distance=%0d", n_pf, pf_dist);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
