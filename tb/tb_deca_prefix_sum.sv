// tb_deca_prefix_sum: the expansion index of lane j must equal the number of
// ones below bit j of the mask, for random and corner masks.
module tb_deca_prefix_sum;
  localparam int W = 32;
  logic [W-1:0] mask; logic [W-1:0][4:0] idx;
  int checks = 0, failures = 0;
  deca_prefix_sum #(.W(W)) dut (.mask, .idx);
  initial begin
    for (int i = 0; i < 2000; i++) begin
      int cnt;
      mask = (i == 0) ? '1 : (i == 1) ? 32'h8000_0001 : W'($urandom);
      #1;
      cnt = 0;
      for (int j = 0; j < W; j++) begin
        checks++;
        if (int'(idx[j]) != cnt) begin
          failures++;
          if (failures < 5) $display("FAIL mask=%h lane %0d idx=%0d exp %0d", mask, j, idx[j], cnt);
        end
        cnt += int'(mask[j]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
