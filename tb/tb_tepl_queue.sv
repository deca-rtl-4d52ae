// tb_tepl_queue: drives the TEPL queue with random allocations (source value
// ready or pending), wake-up broadcasts, random DECA acceptance and
// completion, write-back acknowledgements and occasional pipeline flushes,
// and keeps a cycle-level reference model. Each cycle it checks that an issue
// picks the oldest ready entry, goes to a free port (never more than two TEPLs
// in flight), carries the right metadata, that write-backs name the right
// destination register and release the right Loader, and that a flush squashes
// exactly the busy ports and empties the queue.
module tb_tepl_queue;
  import deca_pkg::*;
  localparam int N = 8;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic alloc_valid, alloc_ready, alloc_src_ready, wake_valid, flush, cmd_valid, cmd_ready, cmd_lid;
  logic [3:0] alloc_dst; logic [5:0] alloc_src, wake_src; tile_meta_t alloc_meta, wake_meta, cmd_meta;
  logic [1:0] squash, done, release_tile; logic wb_valid, wb_port, wb_ack, ev_port_stall; logic [3:0] wb_dst;
  int checks = 0, failures = 0;
  int n_issue = 0, n_wb = 0, n_flush = 0, n_wake = 0, n_stall = 0, max_inflight = 0;

  tepl_queue #(.ENTRIES(N)) dut (.*);

  typedef struct { logic valid, ready, issued; logic [3:0] dst; logic [5:0] src; int seq; tile_meta_t meta; } m_t;
  m_t m [$];          // model entries in age order
  int seq = 0;
  logic [1:0] busy = 0; int pseq [2]; int done_cnt [2];

  function automatic tile_meta_t rmeta();
    tile_meta_t t;
    t.data_base = {16'($urandom), 32'($urandom)}; t.data_len = 16'($urandom);
    t.bm_base = '0; t.bm_len = 0; t.sf_base = '0; t.sf_len = 16'($urandom);
    return t;
  endfunction

  task automatic chk(input bit c, input string s);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s @%0t", s, $time); end
  endtask

  function automatic int find_seq(int s);
    foreach (m[i]) if (m[i].seq == s) return i;
    return -1;
  endfunction

  initial begin
    alloc_valid = 0; alloc_src_ready = 0; wake_valid = 0; flush = 0; cmd_ready = 0; done = 0; wb_ack = 0;
    alloc_dst = 0; alloc_src = 0; wake_src = 0; alloc_meta = '0; wake_meta = '0;
    #12 rst_n = 1;
    for (int cyc = 0; cyc < 20000; cyc++) begin
      int exp_cand, nlive, inflight;
      logic [1:0] exp_busy;
      @(negedge clk);
      // drive inputs
      flush = ($urandom % 150 == 0);
      alloc_valid = ($urandom % 3 == 0);
      alloc_src_ready = ($urandom % 2);
      alloc_dst = 4'($urandom); alloc_src = 6'($urandom % 8); alloc_meta = rmeta();
      wake_valid = ($urandom % 4 == 0); wake_src = 6'($urandom % 8); wake_meta = rmeta();
      cmd_ready = ($urandom % 4 != 0);
      for (int k = 0; k < 2; k++) done[k] = busy[k] && done_cnt[k] == 0;
      wb_ack = ($urandom % 2);
      #1;
      // expected combinational outputs
      exp_cand = -1;
      foreach (m[i]) if (m[i].valid && m[i].ready && !m[i].issued && exp_cand < 0) exp_cand = i;
      nlive = 0; foreach (m[i]) nlive++;
      chk(alloc_ready == (nlive < N && !flush), "alloc_ready");
      chk(cmd_valid == (exp_cand >= 0 && busy != 2'b11 && !flush), "cmd_valid");
      chk(ev_port_stall == (exp_cand >= 0 && busy == 2'b11 && !flush), "ev_port_stall");
      if (cmd_valid) begin
        chk(cmd_lid == (busy[0] ? 1'b1 : 1'b0), "cmd_lid picks a free port");
        chk(cmd_meta == m[exp_cand].meta, "cmd_meta of oldest ready entry");
      end
      chk(squash == (flush ? busy : 2'b00), "squash");
      chk(wb_valid == |(busy & done), "wb_valid");
      if (wb_valid) begin
        logic p;
        p = (busy[0] && done[0]) ? 1'b0 : 1'b1;
        chk(wb_port == p, "wb_port");
        chk(wb_dst == m[find_seq(pseq[p])].dst, "wb_dst");
        chk(release_tile == ((wb_ack && !flush) ? (2'b01 << p) : 2'b00), "release_tile");
      end else chk(release_tile == 2'b00, "no release");
      if (ev_port_stall) n_stall++;
      // update model as the coming clock edge does
      if (flush) begin
        n_flush++;
        m.delete(); busy = 0;
      end else begin
        if (wake_valid) begin
          foreach (m[i]) if (m[i].valid && !m[i].ready && m[i].src == wake_src) begin
            m[i].ready = 1; m[i].meta = wake_meta; n_wake++;
          end
        end
        if (cmd_valid && cmd_ready) begin
          m[exp_cand].issued = 1;
          busy[cmd_lid] = 1; pseq[cmd_lid] = m[exp_cand].seq; done_cnt[cmd_lid] = $urandom % 12;
          n_issue++;
        end
        if (wb_valid && wb_ack) begin
          m.delete(find_seq(pseq[wb_port])); busy[wb_port] = 0; n_wb++;
        end
        if (alloc_valid && alloc_ready) begin
          m_t e;
          e.valid = 1; e.ready = alloc_src_ready; e.issued = 0; e.dst = alloc_dst; e.src = alloc_src;
          e.seq = seq++; e.meta = alloc_meta;
          m.push_back(e);
        end
        for (int k = 0; k < 2; k++) if (busy[k] && done_cnt[k] > 0) done_cnt[k]--;
      end
      inflight = 0; foreach (m[i]) if (m[i].issued) inflight++;
      chk(inflight <= 2, "at most two TEPLs in flight");
      if (inflight > max_inflight) max_inflight = inflight;
    end
    $display("issues=%0d writebacks=%0d flushes=%0d wakes=%0d port_stalls=%0d max_inflight=%0d",
             n_issue, n_wb, n_flush, n_wake, n_stall, max_inflight);
    chk(n_issue > 100 && n_wb > 100 && n_flush > 10 && n_wake > 100 && n_stall > 100 && max_inflight == 2,
        "all behaviours exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #5000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
