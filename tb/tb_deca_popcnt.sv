// tb_deca_popcnt: random and corner bitmask chunks; the window size must equal
// the number of ones and the next head must be head + window.
module tb_deca_popcnt;
  localparam int W = 32;
  logic [W-1:0] mask; logic [15:0] head, next_head; logic [5:0] wnd;
  int checks = 0, failures = 0;
  deca_popcnt #(.W(W), .HW(16)) dut (.mask, .head, .wnd, .next_head);
  initial begin
    for (int i = 0; i < 2000; i++) begin
      int ref_n;
      mask = (i == 0) ? '0 : (i == 1) ? '1 : W'($urandom & $urandom);
      head = 16'($urandom);
      #1;
      ref_n = 0;
      for (int b = 0; b < W; b++) ref_n += int'(mask[b]);
      checks++;
      if (int'(wnd) != ref_n || next_head != 16'(int'(head) + ref_n)) begin
        failures++;
        if (failures < 5) $display("FAIL mask=%h wnd=%0d exp %0d", mask, wnd, ref_n);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
