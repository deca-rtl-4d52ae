// tb_deca_xbar: random sparse vectors and masks; the k-th one of the mask must
// receive the k-th sparse element and every zero bit a BF16 zero. The indices
// are computed here from the mask, independently of the prefix-sum block.
module tb_deca_xbar;
  import deca_pkg::*;
  localparam int W = 32;
  bf16_t [W-1:0] sd, dd; logic [W-1:0] mask; logic [W-1:0][4:0] idx;
  int checks = 0, failures = 0;
  deca_xbar #(.W(W)) dut (.sd, .mask, .idx, .dd);
  initial begin
    for (int i = 0; i < 1000; i++) begin
      int k;
      for (int j = 0; j < W; j++) sd[j] = 16'($urandom | 1);
      mask = (i == 0) ? '1 : W'($urandom);
      k = 0;
      for (int j = 0; j < W; j++) begin idx[j] = 5'(k); k += int'(mask[j]); end
      #1;
      k = 0;
      for (int j = 0; j < W; j++) begin
        checks++;
        if (dd[j] != (mask[j] ? sd[k] : 16'h0)) begin
          failures++;
          if (failures < 5) $display("FAIL lane %0d got %h", j, dd[j]);
        end
        k += int'(mask[j]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
