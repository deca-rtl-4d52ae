// tb_deca_dequant_stage: streams vOps with random window sizes back to back
// for 8-, 7-, 4-bit codes and BF16 bypass. For every vOp the SD register must
// hold table[code] for each of its Wnd codes, and the vOp must occupy the
// stage for exactly ceil(Wnd/Lq) cycles (Lq = 8, 16, 32 codes for W=32, L=8;
// at least one cycle), i.e. a dense 8-bit scheme produces one vOp every W/L =
// 4 cycles, and the bubble count must equal the sum of the extra cycles.
module tb_deca_dequant_stage;
  import deca_pkg::*;
  import deca_tb_pkg::*;
  localparam int W = 32, L = 8, SB_W = 16;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic [4:0] cfg_qbits; logic lut_we; logic [7:0] lut_waddr, lut_raddr; bf16_t lut_wdata, lut_rdata; logic [1:0] kill;
  logic in_valid, in_ready, in_lid, sd_valid, sd_lid, bubble;
  logic [16*W-1:0] in_win; logic [5:0] in_wnd; logic [SB_W-1:0] in_sb, sd_sb; bf16_t [W-1:0] sd;
  bf16_t tbl [256];
  int checks = 0, failures = 0, n_bubble = 0;
  typedef struct { int wnd; bf16_t v [W]; int id; } exp_t;
  exp_t expq [$];
  int last_sd_cycle, cyc;

  deca_dequant_stage #(.W(W), .L(L), .SB_W(SB_W)) dut (.*);

  always @(posedge clk) begin
    cyc++;
    if (bubble) n_bubble++;
  end

  task automatic run_mode(input int q, input int nvops);
    int lq, exp_cycles, t0, b0;
    for (int i = 0; i < 256; i++) tbl[i] = rand_bf16();
    for (int n = 0; n < 256; n++) begin
      @(negedge clk); lut_we = 1; lut_waddr = 8'(n); lut_wdata = lut_entry(q, n, tbl);
    end
    @(negedge clk); lut_we = 0; cfg_qbits = 5'(q);
    for (int n = 0; n < 256; n += 17) begin
      lut_raddr = 8'(n); #1;
      checks++;
      if (lut_rdata != lut_entry(q, n, tbl)) begin failures++; $display("FAIL LUT read-back %0d", n); end
    end
    lq = (q == 16) ? W : (q >= 8) ? L : (q == 7) ? 2 * L : 4 * L;
    exp_cycles = 0;
    b0 = n_bubble;
    fork
      begin   // producer
        for (int i = 0; i < nvops; i++) begin
          exp_t x;
          int bp;
          x.wnd = (i % 5 == 0) ? W : int'($urandom % (W + 1));
          x.id = i;
          in_win = '0;
          bp = 0;
          for (int k = 0; k < x.wnd; k++) begin
            logic [15:0] c;
            c = (q == 16) ? 16'($urandom) : 16'($urandom & ((1 << q) - 1));
            for (int b = 0; b < ((q == 16) ? 16 : q); b++) in_win[bp + b] = c[b];
            bp += (q == 16) ? 16 : q;
            x.v[k] = (q == 16) ? c : tbl[c[7:0]];
          end
          exp_cycles += (x.wnd == 0) ? 1 : (x.wnd + lq - 1) / lq;
          in_wnd = 6'(x.wnd); in_sb = 16'(i); in_lid = 1'b0; in_valid = 1;
          @(posedge clk);
          while (!in_ready) @(posedge clk);
          expq.push_back(x);
          #1 in_valid = 0;
        end
      end
      begin   // consumer
        int got;
        got = 0;
        t0 = -1;
        while (got < nvops) begin
          @(posedge clk);
          if (sd_valid) begin
            exp_t x;
            if (t0 < 0) t0 = cyc;
            last_sd_cycle = cyc;
            x = expq.pop_front();
            checks++;
            if (int'(sd_sb) != x.id) begin failures++; $display("FAIL order"); end
            for (int k = 0; k < x.wnd; k++) begin
              checks++;
              if (sd[k] != x.v[k]) begin
                failures++; if (failures < 6) $display("FAIL q=%0d vop %0d lane %0d got %h exp %h", q, x.id, k, sd[k], x.v[k]);
              end
            end
            got++;
          end
        end
      end
    join
    // cycles from first to last SD write = total occupancy minus the first vOp's
    checks++;
    begin
      int measured, first;
      measured = last_sd_cycle - t0;
      $display("q=%0d: %0d vOps, SD span %0d cycles, expected %0d, bubbles %0d", q, nvops,
               measured, exp_cycles, n_bubble - b0);
      // producer pauses one cycle between vOps only when the stage was free,
      // so the span is at least the occupancy sum minus the first vOp
      if (n_bubble - b0 != exp_cycles - nvops) begin
        failures++; $display("FAIL bubble count %0d exp %0d", n_bubble - b0, exp_cycles - nvops);
      end
    end
  endtask

  // dense rate check: 16 full 8-bit windows take exactly 16*4 cycles
  task automatic dense_rate();
    int t_first, t_last, n;
    cfg_qbits = 5'd8;
    n = 0;
    fork
      begin
        for (int i = 0; i < 16; i++) begin
          in_win = {16*W{1'b1}}; in_wnd = 6'(W); in_sb = 16'(i); in_valid = 1;
          @(posedge clk);
          while (!in_ready) @(posedge clk);
          #1 in_valid = 0;
        end
      end
      begin
        while (n < 16) begin
          @(posedge clk);
          if (sd_valid) begin
            if (n == 0) t_first = cyc;
            t_last = cyc;
            n++;
          end
        end
      end
    join
    checks++;
    if (t_last - t_first != 15 * (W / L)) begin
      failures++; $display("FAIL dense 8-bit rate: %0d cycles for 15 vOp intervals, exp %0d", t_last - t_first, 15 * (W / L));
    end
  endtask

  initial begin
    cfg_qbits = 8; lut_we = 0; lut_waddr = 0; lut_wdata = 0; lut_raddr = 0; kill = 0;
    in_valid = 0; in_win = '0; in_wnd = 0; in_lid = 0; in_sb = 0; cyc = 0;
    #12 rst_n = 1;
    run_mode(8, 200); run_mode(7, 200); run_mode(4, 200); run_mode(16, 100);
    dense_rate();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
