// tb_deca_stream_queue: random pushes of 64-byte lines and random consumes of
// 0..WIN_BITS bits. A reference bit queue in the testbench gives the expected
// window and available-bit count every cycle; a flush must empty the queue.
module tb_deca_stream_queue;
  import deca_pkg::*;
  localparam int DEPTH = 4, WIN = 256;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic flush, in_valid, in_ready, cons_valid; line_t in_line;
  logic [WIN-1:0] win_data; logic [15:0] avail_bits; logic [8:0] cons_bits;
  bit refq [$];
  int checks = 0, failures = 0, pushes = 0, pops = 0;
  deca_stream_queue #(.DEPTH(DEPTH), .WIN_BITS(WIN)) dut (.*);
  initial begin
    flush = 0; in_valid = 0; cons_valid = 0; cons_bits = 0; in_line = '0;
    #12 rst_n = 1;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      int n;
      @(negedge clk);
      // compare state
      checks++;
      if (int'(avail_bits) != refq.size()) begin
        failures++; if (failures < 5) $display("FAIL avail %0d exp %0d", avail_bits, refq.size());
      end
      n = (refq.size() < WIN) ? refq.size() : WIN;
      for (int b = 0; b < n; b++) if (win_data[b] != refq[b]) begin
        failures++; if (failures < 5) $display("FAIL window bit %0d", b); break;
      end
      // drive
      in_valid = ($urandom % 3) != 0;
      for (int w = 0; w < 16; w++) in_line[32*w +: 32] = $urandom;
      cons_bits = 9'($urandom % (WIN + 1));
      if (int'(cons_bits) > refq.size()) cons_bits = 9'(refq.size());
      cons_valid = ($urandom % 2) == 0;
      flush = (cyc == 2000);
      #1;
      if (flush) refq.delete();
      else begin
        if (cons_valid) begin
          for (int b = 0; b < int'(cons_bits); b++) void'(refq.pop_front());
          pops++;
        end
        if (in_valid && in_ready) begin
          for (int b = 0; b < LINE_BITS; b++) refq.push_back(in_line[b]);
          pushes++;
        end
      end
    end
    checks++;
    if (pushes < 100 || pops < 100) begin failures++; $display("FAIL too little traffic"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
