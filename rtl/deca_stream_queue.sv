// deca_stream_queue: cache-line FIFO read as a continuous bit stream.
//
// One instance serves as each of a Loader's three input queues: the Sparse
// Quantized Queue (SQQ), the Bitmask Queue and the Scale Factor Queue. Whole
// 64-byte lines are pushed by the Load Queue in address order. The consumer
// sees a window of WIN_BITS bits starting at the current bit pointer (bit 0 of
// a line is the least significant bit of its byte 0); the window may straddle
// two lines. Each cycle the consumer may retire any number of bits up to
// WIN_BITS (a vOp's window of Q-bit elements, W bitmask bits, or one 8-bit
// scale). Lines are popped when the pointer passes their end.
//
// Interface: push (in_valid/in_ready/in_line), window (win_data, avail_bits =
// bits present from the pointer on), consume (cons_valid, cons_bits), flush
// (drops everything; used at the end of a tile and on squash).
// Timing: push and consume take effect at the clock edge; the window is
// combinational from the registered state.
//
// The paper names the queues and what they hold; depth, the bit-stream view
// and the flush rule are this design's choices.
// Lint note: the simulator flags rst_n as used both asynchronously and synchronously: the
// synchronous use is the assertions' disable condition, not logic.
module deca_stream_queue #(
  parameter int unsigned DEPTH    = 8,     // lines
  parameter int unsigned WIN_BITS = 256    // bits visible at the head
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   flush,
  input  logic                   in_valid,
  output logic                   in_ready,
  input  deca_pkg::line_t        in_line,
  output logic [WIN_BITS-1:0]    win_data,
  output logic [15:0]            avail_bits,
  input  logic                   cons_valid,
  input  logic [$clog2(WIN_BITS+1)-1:0] cons_bits
);
  import deca_pkg::*;

  localparam int unsigned IW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned CW = $clog2(DEPTH + 1);

  line_t             mem [DEPTH];
  logic [IW-1:0]     rd_idx, wr_idx;
  logic [CW-1:0]     count;
  logic [9:0]        bit_ptr;       // 0 .. LINE_BITS-1

  logic [IW-1:0]     rd_idx1;
  logic [2*LINE_BITS-1:0] head2;
  logic [10:0]       new_ptr;
  logic              pop, push;

  function automatic logic [IW-1:0] incr(input logic [IW-1:0] i);
    return (i == IW'(DEPTH - 1)) ? '0 : i + 1'b1;
  endfunction

  assign rd_idx1  = incr(rd_idx);
  assign head2    = {mem[rd_idx1], mem[rd_idx]};
  assign win_data = WIN_BITS'(head2 >> bit_ptr);
  assign in_ready = (count != CW'(DEPTH));
  assign push     = in_valid && in_ready;

  always_comb begin
    if (count == '0) avail_bits = '0;
    else             avail_bits = 16'(count) * 16'(LINE_BITS) - 16'(bit_ptr);
  end

  assign new_ptr = 11'(bit_ptr) + 11'(cons_bits);
  assign pop     = cons_valid && (new_ptr >= 11'(LINE_BITS));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_idx  <= '0;
      wr_idx  <= '0;
      count   <= '0;
      bit_ptr <= '0;
    end else if (flush) begin
      rd_idx  <= '0;
      wr_idx  <= '0;
      count   <= '0;
      bit_ptr <= '0;
    end else begin
      if (push) wr_idx <= incr(wr_idx);
      if (pop)  rd_idx <= rd_idx1;
      count <= count + CW'(push) - CW'(pop);
      if (cons_valid) bit_ptr <= pop ? 10'(new_ptr - 11'(LINE_BITS)) : new_ptr[9:0];
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wr_idx] <= in_line;
  end

  // A consumer may only retire bits that are present.
  assert property (@(posedge clk) disable iff (!rst_n || flush)
                   cons_valid |-> (16'(cons_bits) <= avail_bits))
    else $error("stream_queue: consumed past available data");
endmodule
