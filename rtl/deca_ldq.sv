// deca_ldq: a Loader's Load Queue.
//
// On start it takes a tile's metadata and walks the three structures line by
// line, bitmask first, then scale factors, then the nonzero data, issuing one
// 64-byte demand load per cycle to the L2 while a queue entry is free. Each
// load owns an entry; responses may return in any order and are matched by
// their tag. Entries drain strictly in allocation order into the Bitmask Queue,
// the Scale Factor Queue or the SQQ, so each queue receives its lines in
// address order. kill (a squash from the core) drops all entries and bumps a
// 3-bit epoch carried in the tag, so responses to aborted loads are ignored
// (unless eight kills pass while one such response is still outstanding).
//
// Interface: start/meta; mem_req (valid/ready, line address, tag); mem_resp
// (valid, tag, line); three push ports with a shared line; busy is high from
// start until the last line has been handed to its queue.
// Tag layout: [TAG_W-1] loader id, [6:4] epoch, [3:0] entry (ENTRIES <= 16).
//
// The paper gives the LDQ's role (read the three structures whose bases and
// lengths come with the metadata and place lines in the matching queue).
// Entry count, issue order, tag layout and the rule that structure bases
// are 64-byte aligned are this design's choices.
// Lint note: the simulator flags rst_n as used both asynchronously and synchronously: the
// synchronous use is the assertions' disable condition, not logic.
module deca_ldq #(
  parameter int unsigned ENTRIES   = 16,
  parameter bit          LOADER_ID = 1'b0
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  deca_pkg::tile_meta_t  meta,
  input  logic                  kill,
  output logic                  busy,
  // demand loads
  output logic                  req_valid,
  input  logic                  req_ready,
  output deca_pkg::addr_t       req_addr,
  output logic [deca_pkg::TAG_W-1:0] req_tag,
  // responses
  input  logic                  resp_valid,
  input  deca_pkg::mem_resp_t   resp,
  // to the queues
  output logic                  push_data,
  output logic                  push_bm,
  output logic                  push_sf,
  output deca_pkg::line_t       push_line,
  input  logic                  ready_data,
  input  logic                  ready_bm,
  input  logic                  ready_sf
);
  import deca_pkg::*;

  localparam int unsigned EW = $clog2(ENTRIES);
  localparam int unsigned CW = $clog2(ENTRIES + 1);

  typedef struct packed {
    struct_e kind;
    logic    filled;
  } ent_t;

  ent_t          ent   [ENTRIES];
  line_t         edata [ENTRIES];
  logic [EW-1:0] head, tail;
  logic [CW-1:0] count;
  logic [2:0]    epoch;

  // structure walker
  struct_e       cur;
  addr_t         cur_addr;
  logic [LEN_W:0] left;        // bytes still to request in cur
  tile_meta_t    m;
  logic          issuing;

  logic issue, drain, resp_ok;
  logic [EW-1:0] resp_idx;

  assign req_valid = issuing && (count != CW'(ENTRIES));
  assign req_addr  = cur_addr;
  assign req_tag   = TAG_W'({LOADER_ID, epoch, 4'(tail)});
  assign issue     = req_valid && req_ready;

  assign resp_idx  = resp.tag[EW-1:0];
  assign resp_ok   = resp_valid && (resp.tag[6:4] == epoch) &&
                     (resp.tag[TAG_W-1] == LOADER_ID) && !kill;

  // drain head entry into its queue
  always_comb begin
    push_data = 1'b0;
    push_bm   = 1'b0;
    push_sf   = 1'b0;
    drain     = 1'b0;
    push_line = edata[head];
    if (count != '0 && ent[head].filled && !kill) begin
      unique case (ent[head].kind)
        STRUCT_DATA:  begin push_data = ready_data; drain = ready_data; end
        STRUCT_BMASK: begin push_bm   = ready_bm;   drain = ready_bm;   end
        default:      begin push_sf   = ready_sf;   drain = ready_sf;   end
      endcase
    end
  end

  assign busy = issuing || (count != '0);

  // length of a structure rounded to lines, in bytes
  function automatic logic [LEN_W:0] lines_bytes(input len_t len);
    return {1'b0, len} + (LEN_W+1)'(LINE_BYTES - 1);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      head     <= '0;
      tail     <= '0;
      count    <= '0;
      epoch    <= 3'd0;
      issuing  <= 1'b0;
      cur      <= STRUCT_BMASK;
      cur_addr <= '0;
      left     <= '0;
      m        <= '0;
      for (int i = 0; i < ENTRIES; i++) ent[i] <= '{kind: STRUCT_DATA, filled: 1'b0};
    end else if (kill) begin
      head    <= '0;
      tail    <= '0;
      count   <= '0;
      epoch   <= epoch + 3'd1;
      issuing <= 1'b0;
      for (int i = 0; i < ENTRIES; i++) ent[i].filled <= 1'b0;
    end else begin
      if (start) begin
        m        <= meta;
        issuing  <= 1'b1;
        if (meta.bm_len != '0) begin
          cur <= STRUCT_BMASK; cur_addr <= meta.bm_base; left <= lines_bytes(meta.bm_len);
        end else if (meta.sf_len != '0) begin
          cur <= STRUCT_SCALE; cur_addr <= meta.sf_base; left <= lines_bytes(meta.sf_len);
        end else begin
          cur <= STRUCT_DATA; cur_addr <= meta.data_base; left <= lines_bytes(meta.data_len);
        end
      end else if (issue) begin
        ent[tail] <= '{kind: cur, filled: 1'b0};
        tail      <= (tail == EW'(ENTRIES - 1)) ? '0 : tail + 1'b1;
        if (left > (LEN_W+1)'(2*LINE_BYTES - 1)) begin
          left     <= left - (LEN_W+1)'(LINE_BYTES);
          cur_addr <= cur_addr + addr_t'(LINE_BYTES);
        end else begin
          // last line of this structure: move on
          unique case (cur)
            STRUCT_BMASK: begin
              cur <= STRUCT_SCALE; cur_addr <= m.sf_base; left <= lines_bytes(m.sf_len);
              if (m.sf_len == '0) begin
                cur <= STRUCT_DATA; cur_addr <= m.data_base; left <= lines_bytes(m.data_len);
              end
            end
            STRUCT_SCALE: begin
              cur <= STRUCT_DATA; cur_addr <= m.data_base; left <= lines_bytes(m.data_len);
            end
            default: issuing <= 1'b0;
          endcase
        end
      end
      if (resp_ok) ent[resp_idx].filled <= 1'b1;
      if (drain) begin
        ent[head].filled <= 1'b0;
        head <= (head == EW'(ENTRIES - 1)) ? '0 : head + 1'b1;
      end
      count <= count + CW'(issue && !start) - CW'(drain);
    end
  end

  always_ff @(posedge clk) begin
    if (resp_ok) edata[resp_idx] <= resp.data;
  end

  // Lines of a structure are issued while its remaining length is positive.
  assert property (@(posedge clk) disable iff (!rst_n) issue |-> left != '0)
    else $error("ldq: issued a line past the end of a structure");
endmodule
