// tb_deca_tout_regs: fills both TOut registers chunk by chunk with different
// data, reads all 16 rows of each back, and checks the valid flags (set,
// cleared by clr, clr winning over set).
module tb_deca_tout_regs;
  import deca_pkg::*;
  localparam int W = 32;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic wr_en, wr_sel, rd_sel; logic [3:0] wr_chunk, rd_row; bf16_t [W-1:0] wr_data;
  logic [1:0] set_valid, clr, valid; bf16_t [ROW_ELEMS-1:0] rd_data;
  bf16_t img [2][512];
  int checks = 0, failures = 0;
  deca_tout_regs #(.W(W)) dut (.*);
  task automatic chk(input bit c, input string what);
    checks++; if (!c) begin failures++; if (failures < 6) $display("FAIL %s", what); end
  endtask
  initial begin
    wr_en = 0; wr_sel = 0; rd_sel = 0; wr_chunk = 0; rd_row = 0; wr_data = '0; set_valid = 0; clr = 0;
    #12 rst_n = 1;
    chk(valid == 2'b00, "reset valid");
    for (int s = 0; s < 2; s++)
      for (int c = 0; c < 512 / W; c++) begin
        @(negedge clk);
        wr_en = 1; wr_sel = 1'(s); wr_chunk = 4'(c);
        for (int j = 0; j < W; j++) begin
          wr_data[j] = 16'($urandom);
          img[s][c * W + j] = wr_data[j];
        end
        set_valid = (c == 512 / W - 1) ? (2'b01 << s) : 2'b00;
      end
    @(negedge clk); wr_en = 0; set_valid = 0;
    chk(valid == 2'b11, "both valid");
    for (int s = 0; s < 2; s++)
      for (int r = 0; r < 16; r++) begin
        rd_sel = 1'(s); rd_row = 4'(r); #1;
        for (int e = 0; e < 32; e++) chk(rd_data[e] == img[s][r * 32 + e], "row data");
      end
    clr = 2'b01; @(negedge clk); clr = 0;
    chk(valid == 2'b10, "clear 0");
    set_valid = 2'b10; clr = 2'b10; @(negedge clk); set_valid = 0; clr = 0;
    chk(valid == 2'b00, "clear wins");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
