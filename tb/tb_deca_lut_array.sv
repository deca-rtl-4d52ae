// tb_deca_lut_array: loads a table replicated for each code width and checks
// that every lane below Lq (L, 2L, 4L for 8-, 7-, 4-bit codes) returns
// table[code] for random codes, and that every entry reads back as written.
module tb_deca_lut_array;
  import deca_pkg::*;
  import deca_tb_pkg::*;
  localparam int L = 8;
  logic clk = 0; always #5 clk = ~clk;
  logic we; logic [7:0] waddr, raddr; bf16_t wdata, rdata; logic [4:0] qbits;
  logic [4*L-1:0][7:0] codes; bf16_t [4*L-1:0] vals;
  bf16_t tbl [256];
  int checks = 0, failures = 0;
  deca_lut_array #(.L(L)) dut (.*);

  task automatic run_mode(input int q);
    int lq;
    for (int i = 0; i < 256; i++) tbl[i] = rand_bf16();
    for (int n = 0; n < 256; n++) begin
      @(negedge clk); we = 1; waddr = 8'(n); wdata = lut_entry(q, n, tbl);
    end
    @(negedge clk); we = 0; qbits = 5'(q);
    lq = (q >= 8) ? L : (q == 7) ? 2 * L : 4 * L;
    for (int n = 0; n < 256; n++) begin
      raddr = 8'(n); #1;
      checks++;
      if (rdata != lut_entry(q, n, tbl)) begin failures++; $display("FAIL read-back %0d", n); end
    end
    for (int it = 0; it < 200; it++) begin
      for (int e = 0; e < 4 * L; e++) codes[e] = 8'($urandom & ((1 << q) - 1));
      #1;
      for (int e = 0; e < lq; e++) begin
        checks++;
        if (vals[e] != tbl[codes[e]]) begin
          failures++;
          if (failures < 6) $display("FAIL q=%0d lane %0d code %h got %h exp %h", q, e, codes[e], vals[e], tbl[codes[e]]);
        end
      end
    end
  endtask

  initial begin
    we = 0; waddr = 0; wdata = 0; qbits = 8; codes = '0; raddr = 0;
    run_mode(8); run_mode(7); run_mode(6); run_mode(4); run_mode(2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
