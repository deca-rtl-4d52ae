// tb_deca_ctrl_regs: reset value, configuration write and read-back, status
// read, LUT-entry stores forwarded as one-cycle write pulses, and stores to
// unmapped addresses ignored, LUT entries read back through the LUT read port. Random configuration words check each field
// separately.
module tb_deca_ctrl_regs;
  import deca_pkg::*;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic wr_en; logic [9:0] wr_addr, rd_addr; logic [31:0] wr_data, rd_data; logic [3:0] status;
  deca_cfg_t cfg; logic lut_we; logic [7:0] lut_waddr, lut_raddr; bf16_t lut_wdata, lut_rdata;
  assign lut_rdata = 16'(lut_raddr) * 16'd13 + 16'd5;   // stand-in for the LUT array
  int checks = 0, failures = 0, pulses = 0;
  deca_ctrl_regs dut (.*);
  task automatic chk(input bit c, input string what);
    checks++; if (!c) begin failures++; $display("FAIL %s", what); end
  endtask
  always @(posedge clk) if (lut_we) begin
    pulses++;
    chk(lut_waddr == 8'(pulses * 7) && lut_wdata == 16'(pulses * 311), "lut write forwarded");
  end
  initial begin
    wr_en = 0; wr_addr = 0; wr_data = 0; rd_addr = 0; status = 4'b1010;
    #12 rst_n = 1;
    @(negedge clk);
    chk(cfg.qbits == 8 && !cfg.sparse_en && !cfg.scale_en, "reset config");
    wr_en = 1; wr_addr = 0; wr_data = 32'h0000_6304;   // q=4, sparse, scale, group 2^6
    @(negedge clk); wr_en = 0;
    chk(cfg.qbits == 4 && cfg.sparse_en && cfg.scale_en && cfg.group_log2 == 6, "config fields");
    rd_addr = 0; #1;
    chk(rd_data == 32'h0000_6304, "config readback");
    rd_addr = 1; #1;
    chk(rd_data == 32'h0000_000A, "status readback");
    for (int n = 0; n < 256; n += 5) begin
      rd_addr = 10'h100 + 10'(n); #1;
      chk(lut_raddr == 8'(n) && rd_data == {16'd0, 16'(n) * 16'd13 + 16'd5}, "LUT read-back");
    end
    rd_addr = 10'h080; #1;
    chk(rd_data == 32'd0, "unmapped read is zero");
    // random field combinations, each field checked on its own
    for (int n = 0; n < 64; n++) begin
      logic [31:0] d;
      d = $urandom & 32'h0000_F31F;
      @(negedge clk); wr_en = 1; wr_addr = 0; wr_data = d;
      @(negedge clk); wr_en = 0; rd_addr = 0; #1;
      chk(cfg.qbits == d[4:0], "qbits field");
      chk(cfg.sparse_en == d[8], "sparse field");
      chk(cfg.scale_en == d[9], "scale field");
      chk(cfg.group_log2 == d[15:12], "group field");
      chk(rd_data == d, "random config readback");
    end
    @(negedge clk); wr_en = 1; wr_addr = 0; wr_data = 32'h0000_6304;
    @(negedge clk); wr_en = 0;
    for (int n = 1; n <= 20; n++) begin
      @(negedge clk); wr_en = 1; wr_addr = 10'h100 + 10'(n * 7); wr_data = 32'(n * 311);
    end
    @(negedge clk); wr_en = 1; wr_addr = 10'h080; wr_data = 32'hFFFF_FFFF;
    @(negedge clk); wr_en = 0;
    chk(pulses == 20, "20 LUT pulses, none for unmapped store");
    chk(cfg.qbits == 4, "unmapped store leaves config");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
