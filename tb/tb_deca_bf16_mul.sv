// tb_deca_bf16_mul: random normal operands against a double-precision reference
// rounded to nearest-even, plus zero, subnormal, overflow, underflow,
// infinity and NaN cases.
module tb_deca_bf16_mul;
  import deca_pkg::*;
  import deca_tb_pkg::*;
  bf16_t a, b, p;
  int checks = 0, failures = 0;
  deca_bf16_mul dut (.a, .b, .p);

  task automatic chk(input bf16_t x, input bf16_t y, input bf16_t e);
    a = x; b = y;
    #1;
    checks++;
    if (p != e) begin
      failures++;
      if (failures < 8) $display("FAIL %h * %h = %h exp %h", x, y, p, e);
    end
  endtask

  initial begin
    for (int i = 0; i < 5000; i++) begin
      bf16_t x, y;
      x = {1'($urandom), 8'(8'd64 + 8'($urandom % 128)), 7'($urandom)};
      y = {1'($urandom), 8'(8'd64 + 8'($urandom % 128)), 7'($urandom)};
      chk(x, y, ref_mul(x, y));
    end
    chk(16'h3F80, 16'h4040, 16'h4040);     // 1 * 3
    chk(16'h3FC0, 16'h3FC0, 16'h4010);     // 1.5 * 1.5 = 2.25
    chk(16'h0000, 16'h4040, 16'h0000);     // zero
    chk(16'h8000, 16'h4040, 16'h8000);     // -0 * 3
    chk(16'h0040, 16'h4040, 16'h0000);     // subnormal input flushed
    chk(16'h7F00, 16'h7F00, 16'h7F80);     // overflow -> inf
    chk(16'h0080, 16'h0080, 16'h0000);     // underflow -> 0
    chk(16'h7F80, 16'hC000, 16'hFF80);     // inf * -2
    chk(16'h7F80, 16'h0000, 16'h7FC0);     // inf * 0 -> NaN
    chk(16'h7FC1, 16'h3F80, 16'h7FC0);     // NaN
    chk(16'h3F81, 16'h3F81, 16'h3F82);     // (1+2^-7)^2 rounds to 1+2^-6
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
