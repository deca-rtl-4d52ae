// deca_mem_model: behavioural stand-in for the L2 cache seen by a DECA.
//
// Holds 64-byte lines in a sparse array. Demand requests are accepted when
// fewer than MAX_OUT are outstanding and answered after a random latency of
// MIN_LAT..MAX_LAT cycles, so responses come back out of order. Prefetch
// requests are counted and dropped. mshr_occ reports the outstanding demand
// count. A line never written reads as zero.
module deca_mem_model #(
  parameter int unsigned MIN_LAT = 4,
  parameter int unsigned MAX_LAT = 30,
  parameter int unsigned MAX_OUT = 24
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                req_valid,
  output logic                req_ready,
  input  deca_pkg::mem_req_t  req,
  output logic                resp_valid,
  output deca_pkg::mem_resp_t resp,
  output logic [5:0]          mshr_occ
);
  import deca_pkg::*;

  line_t lines [addr_t];
  int    n_demand, n_prefetch;

  typedef struct {
    addr_t            addr;
    logic [TAG_W-1:0] tag;
    int               due;
  } pend_t;
  pend_t pend [$];
  int    cyc;

  task automatic write_bytes(input addr_t base, input logic [7:0] bytes [], input int n);
    for (int i = 0; i < n; i++) begin
      addr_t a;
      a = base + addr_t'(i);
      if (!lines.exists({a[ADDR_W-1:6], 6'd0})) lines[{a[ADDR_W-1:6], 6'd0}] = '0;
      lines[{a[ADDR_W-1:6], 6'd0}][8*a[5:0] +: 8] = bytes[i];
    end
  endtask

  assign req_ready = (pend.size() < MAX_OUT);
  assign mshr_occ  = 6'(pend.size());

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      resp_valid <= 1'b0;
      resp       <= '0;
      cyc        <= 0;
      n_demand   <= 0;
      n_prefetch <= 0;
      pend.delete();
    end else begin
      cyc <= cyc + 1;
      resp_valid <= 1'b0;
      // answer one due request, picked at random among the due ones
      begin
        automatic int due_idx [$];
        for (int i = 0; i < pend.size(); i++) if (pend[i].due <= cyc) due_idx.push_back(i);
        if (due_idx.size() > 0) begin
          int k;
          k = due_idx[$urandom % due_idx.size()];
          resp_valid <= 1'b1;
          resp.tag   <= pend[k].tag;
          resp.data  <= lines.exists(pend[k].addr) ? lines[pend[k].addr] : '0;
          pend.delete(k);
        end
      end
      if (req_valid && req_ready) begin
        if (req.prefetch) n_prefetch <= n_prefetch + 1;
        else begin
          pend_t p;
          p.addr = {req.addr[ADDR_W-1:6], 6'd0};
          p.tag  = req.tag;
          p.due  = cyc + int'(MIN_LAT) + int'($urandom % (MAX_LAT - MIN_LAT + 1));
          pend.push_back(p);
          n_demand <= n_demand + 1;
        end
      end
    end
  end
endmodule
