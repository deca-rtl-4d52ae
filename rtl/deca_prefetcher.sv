// deca_prefetcher: a Loader's tile prefetcher (PF).
//
// It watches the metadata of the tiles its Loader is asked to fetch. When two
// consecutive tiles show the same address step for all three structures
// (nonzero data, bitmask, scale factors), it predicts the tile `dist` steps
// ahead (bases advanced by pdist*step, lengths equal to the current tile's) and
// issues one L2 prefetch per line of that tile, bitmask first, then scales,
// then data. Prefetches carry no response.
//
// Aggressiveness: the distance `dist` (1..MAX_DIST tiles ahead) is raised by
// one at a tile start when the L2 MSHR occupancy is below MSHR_LOW and lowered
// when it is at or above MSHR_HIGH; no prefetch is sent while the occupancy is
// at or above MSHR_HIGH. This keeps the MSHRs busy without flooding them.
//
// Interface: observe (one-cycle pulse with the tile's metadata), mshr_occ,
// pf_valid/pf_ready/pf_addr. Timing: one line address per accepted cycle.
//
// The paper states only that the PF predicts future tiles' bases and lengths
// from the observed ones and adapts its aggressiveness to keep L2 MSHR
// occupancy high. The stride rule, thresholds and distance range are this
// design's choices.
module deca_prefetcher #(
  parameter int unsigned MAX_DIST  = 4,
  parameter int unsigned MSHR_W    = 6,
  parameter int unsigned MSHR_LOW  = 16,
  parameter int unsigned MSHR_HIGH = 40
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  observe,
  input  deca_pkg::tile_meta_t  meta,
  input  logic [MSHR_W-1:0]     mshr_occ,
  output logic                  pf_valid,
  input  logic                  pf_ready,
  output deca_pkg::addr_t       pf_addr,
  output logic [2:0]            pf_dist       // current distance, observable
);
  import deca_pkg::*;

  tile_meta_t prev;
  logic       have_prev, have_step;
  addr_t      step_d, step_b, step_s;
  logic [2:0] pdist;

  // walker over the predicted tile
  tile_meta_t tgt;
  struct_e    cur;
  addr_t      cur_addr;
  logic [LEN_W:0] left;
  logic       walking;

  addr_t nd, nb, ns;
  logic  confident, throttle;
  logic [2:0] pdist_n;

  assign nd = meta.data_base - prev.data_base;
  assign nb = meta.bm_base   - prev.bm_base;
  assign ns = meta.sf_base   - prev.sf_base;
  assign confident = have_step && have_prev && (nd == step_d) && (nb == step_b) && (ns == step_s);
  assign throttle  = (mshr_occ >= MSHR_W'(MSHR_HIGH));

  assign pf_valid = walking && !throttle && !observe;
  assign pf_addr  = cur_addr;
  assign pf_dist  = pdist;

  always_comb begin
    pdist_n = pdist;
    if (mshr_occ < MSHR_W'(MSHR_LOW) && pdist < 3'(MAX_DIST)) pdist_n = pdist + 3'd1;
    else if (throttle && pdist > 3'd1) pdist_n = pdist - 3'd1;
  end

  function automatic logic [LEN_W:0] lines_bytes(input len_t len);
    return {1'b0, len} + (LEN_W+1)'(LINE_BYTES - 1);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prev      <= '0;
      have_prev <= 1'b0;
      have_step <= 1'b0;
      step_d    <= '0;
      step_b    <= '0;
      step_s    <= '0;
      pdist      <= 3'd1;
      tgt       <= '0;
      cur       <= STRUCT_BMASK;
      cur_addr  <= '0;
      left      <= '0;
      walking   <= 1'b0;
    end else if (observe) begin
      prev      <= meta;
      have_prev <= 1'b1;
      if (have_prev) begin
        step_d    <= nd;
        step_b    <= nb;
        step_s    <= ns;
        have_step <= 1'b1;
      end
      pdist <= pdist_n;
      if (confident) begin
        // predicted tile, pdist_n steps ahead; a new prediction replaces an
        // unfinished walk
        tgt.data_base <= meta.data_base + nd * addr_t'(pdist_n);
        tgt.bm_base   <= meta.bm_base   + nb * addr_t'(pdist_n);
        tgt.sf_base   <= meta.sf_base   + ns * addr_t'(pdist_n);
        tgt.data_len  <= meta.data_len;
        tgt.bm_len    <= meta.bm_len;
        tgt.sf_len    <= meta.sf_len;
        walking       <= 1'b1;
        if (meta.bm_len != '0) begin
          cur <= STRUCT_BMASK; cur_addr <= meta.bm_base + nb * addr_t'(pdist_n);
          left <= lines_bytes(meta.bm_len);
        end else if (meta.sf_len != '0) begin
          cur <= STRUCT_SCALE; cur_addr <= meta.sf_base + ns * addr_t'(pdist_n);
          left <= lines_bytes(meta.sf_len);
        end else begin
          cur <= STRUCT_DATA; cur_addr <= meta.data_base + nd * addr_t'(pdist_n);
          left <= lines_bytes(meta.data_len);
        end
      end
    end else if (pf_valid && pf_ready) begin
      if (left > (LEN_W+1)'(2*LINE_BYTES - 1)) begin
        left     <= left - (LEN_W+1)'(LINE_BYTES);
        cur_addr <= cur_addr + addr_t'(LINE_BYTES);
      end else begin
        unique case (cur)
          STRUCT_BMASK: begin
            if (tgt.sf_len != '0) begin
              cur <= STRUCT_SCALE; cur_addr <= tgt.sf_base; left <= lines_bytes(tgt.sf_len);
            end else begin
              cur <= STRUCT_DATA; cur_addr <= tgt.data_base; left <= lines_bytes(tgt.data_len);
            end
          end
          STRUCT_SCALE: begin
            cur <= STRUCT_DATA; cur_addr <= tgt.data_base; left <= lines_bytes(tgt.data_len);
          end
          default: walking <= 1'b0;
        endcase
      end
    end
  end
endmodule
