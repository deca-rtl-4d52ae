// tb_deca_ldq: a Load Queue against the behavioural L2 (random latency,
// out-of-order responses) with randomly stalling queues. Each structure's
// lines must reach the right queue, complete and in address order (bitmask,
// scales, data). Then a fetch is killed part-way and a new tile started: only
// the new tile's lines may arrive, stale responses must be ignored. Also
// checks that the LDQ never holds more than ENTRIES loads.
module tb_deca_ldq;
  import deca_pkg::*;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic start, kill, busy, req_valid, req_ready, resp_valid;
  tile_meta_t meta; addr_t req_addr; logic [TAG_W-1:0] req_tag; mem_resp_t resp; mem_req_t mreq;
  logic push_data, push_bm, push_sf, ready_data, ready_bm, ready_sf; line_t push_line;
  logic [5:0] mshr_occ;
  int checks = 0, failures = 0;
  line_t exp_q [3][$];

  deca_ldq #(.ENTRIES(8), .LOADER_ID(1'b1)) dut (.*);
  assign mreq = '{addr: req_addr, prefetch: 1'b0, tag: req_tag};
  deca_mem_model #(.MIN_LAT(3), .MAX_LAT(25), .MAX_OUT(32)) mem (
    .clk, .rst_n, .req_valid, .req_ready, .req(mreq), .resp_valid, .resp, .mshr_occ);

  always @(posedge clk) if (rst_n) begin
    if (push_data || push_bm || push_sf) begin
      int s;
      s = push_data ? 0 : push_bm ? 1 : 2;
      checks++;
      if (exp_q[s].size() == 0 || push_line != exp_q[s][0]) begin
        failures++; if (failures < 5) $display("FAIL struct %0d unexpected line", s);
      end
      if (exp_q[s].size() != 0) void'(exp_q[s].pop_front());
    end
    checks++;
    if (int'(dut.count) > 8) begin failures++; $display("FAIL overfull"); end
  end
  always @(negedge clk) begin
    ready_data = ($urandom % 4) != 0; ready_bm = ($urandom % 4) != 0; ready_sf = ($urandom % 4) != 0;
  end

  task automatic fill(input addr_t base, input int len, input int s);
    logic [7:0] b [];
    b = new[len];
    for (int i = 0; i < len; i++) b[i] = 8'($urandom);
    mem.write_bytes(base, b, len);
    for (int l = 0; l < (len + 63) / 64; l++) exp_q[s].push_back(mem.lines[base + addr_t'(64 * l)]);
  endtask

  task automatic go(input tile_meta_t m);
    @(negedge clk); meta = m; start = 1; @(negedge clk); start = 0;
  endtask

  initial begin
    tile_meta_t m;
    start = 0; kill = 0; meta = '0;
    #12 rst_n = 1;
    m = '{data_base: 48'h1000, data_len: 16'd300, bm_base: 48'h2000, bm_len: 16'd64,
          sf_base: 48'h3000, sf_len: 16'd16};
    fill(m.data_base, 300, 0); fill(m.bm_base, 64, 1); fill(m.sf_base, 16, 2);
    go(m);
    while (busy) @(negedge clk);
    checks++;
    if (exp_q[0].size() + exp_q[1].size() + exp_q[2].size() != 0) begin failures++; $display("FAIL lines missing"); end
    // kill part-way, then a fresh dense tile (no bitmask, no scales)
    m = '{data_base: 48'h8000, data_len: 16'd640, bm_base: 48'h0, bm_len: 16'd0, sf_base: 48'h0, sf_len: 16'd0};
    fill(m.data_base, 640, 0);
    go(m);
    repeat (6) @(negedge clk);
    kill = 1; @(negedge clk); kill = 0;
    exp_q[0].delete();
    m.data_base = 48'hC000; m.data_len = 16'd512;
    fill(m.data_base, 512, 0);
    go(m);
    while (busy) @(negedge clk);
    repeat (40) @(negedge clk);
    checks++;
    if (exp_q[0].size() != 0) begin failures++; $display("FAIL %0d data lines missing after kill", exp_q[0].size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
