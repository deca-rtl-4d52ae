// deca_dequant_stage: first stage of the DECA vector pipeline (Dequantization).
//
// A vOp enters with its window: the Wnd packed Q-bit codes it reads from the
// SQQ (LSB first) and its sideband (bitmask chunk, expansion indices, loader,
// position in the tile). The window is captured in an input register and
// translated Lq codes per cycle through the LUT array (Lq = L, 2L or 4L for 8-,
// 7- and <=6-bit codes). A vOp whose window holds more than Lq codes therefore
// stays ceil(Wnd/Lq) cycles; each extra cycle is a pipeline bubble. The BF16
// results are written into the Sparse Dequantized (SD) register, position
// c*Lq+e for lane e of cycle c; sd_valid rises for one cycle after the last
// chunk. A new vOp is accepted in the cycle the current one finishes, so
// vOps without bubbles flow at one per cycle. With qbits = 16 the LUTs are
// bypassed and the 16-bit values are copied (the "stage skipped" case).
//
// Interface: in_valid/in_ready/in_win/in_wnd/in_lid/in_sb; LUT write and
// read-back ports;
// cfg_qbits; kill[lid] drops a vOp of that loader held in the stage (a
// killed vOp already in SD is dropped by the next stage);
// sd_valid/sd/sd_lid/sd_sb; bubble (high in each cycle a vOp is held for
// another chunk). Latency: accept at edge t, SD valid after edge t+ceil(Wnd/Lq).
//
// Stage function, the LUT-array lookup rate and the bubble rule follow the
// paper. The input capture register, the sideband and the BF16 bypass for
// 16-bit data are this design's choices.
// Lint note: the simulator flags rst_n as used both asynchronously and synchronously: the
// synchronous use is the assertions' disable condition, not logic.
module deca_dequant_stage #(
  parameter int unsigned W    = 32,
  parameter int unsigned L    = 8,
  parameter int unsigned SB_W = 8
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [4:0]              cfg_qbits,
  input  logic                    lut_we,
  input  logic [7:0]              lut_waddr,
  input  deca_pkg::bf16_t         lut_wdata,
  input  logic [7:0]              lut_raddr,
  output deca_pkg::bf16_t         lut_rdata,
  input  logic [1:0]              kill,
  input  logic                    in_valid,
  output logic                    in_ready,
  input  logic [16*W-1:0]         in_win,
  input  logic [$clog2(W+1)-1:0]  in_wnd,
  input  logic                    in_lid,
  input  logic [SB_W-1:0]         in_sb,
  output logic                    sd_valid,
  output deca_pkg::bf16_t [W-1:0] sd,
  output logic                    sd_lid,
  output logic [SB_W-1:0]         sd_sb,
  output logic                    bubble
);
  import deca_pkg::*;

  localparam int unsigned NW = $clog2(W + 1);
  localparam int unsigned CH = $clog2(W + 1);     // chunk counter width

  logic [16*W-1:0] win;
  logic            lid;
  logic [SB_W-1:0] sb;
  logic            busy;
  logic [CH-1:0]   chunk, nchunks;
  logic            last, accept;

  logic [NW:0]     lq;            // codes per cycle
  logic [NW-1:0]   nch_in;
  logic [4*L-1:0][7:0] codes;
  bf16_t [4*L-1:0] vals;
  logic [7:0]      qmask;
  logic            bypass;

  assign bypass = (cfg_qbits >= 5'd16);
  always_comb begin
    if (bypass)                  lq = (NW+1)'(W);
    else if (cfg_qbits >= 5'd8)  lq = (NW+1)'(L);
    else if (cfg_qbits == 5'd7)  lq = (NW+1)'(2 * L);
    else                         lq = (NW+1)'(4 * L);
    if (lq > (NW+1)'(W)) lq = (NW+1)'(W);
  end

  // number of cycles a window of in_wnd codes needs (at least one)
  always_comb begin
    nch_in = NW'((({1'b0, in_wnd} + lq - 1'b1)) / lq);
    if (nch_in == '0) nch_in = NW'(1);
  end

  assign qmask = (cfg_qbits >= 5'd8) ? 8'hFF : 8'((9'd1 << cfg_qbits) - 9'd1);

  // codes of this cycle: the window register is shifted after every chunk
  always_comb begin
    for (int e = 0; e < 4 * L; e++) codes[e] = 8'(win >> (e * int'(cfg_qbits))) & qmask;
  end

  deca_lut_array #(.L(L)) u_lut (
    .clk, .we(lut_we), .waddr(lut_waddr), .wdata(lut_wdata), .raddr(lut_raddr), .rdata(lut_rdata),
    .qbits(cfg_qbits), .codes, .vals
  );

  assign last     = busy && (chunk == nchunks - 1'b1);
  assign in_ready = !busy || last || kill[lid];
  assign accept   = in_valid && in_ready && !kill[in_lid];
  assign bubble   = busy && !last && !kill[lid];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      chunk    <= '0;
      nchunks  <= '0;
      win      <= '0;
      lid      <= 1'b0;
      sb       <= '0;
      sd_valid <= 1'b0;
      sd_lid   <= 1'b0;
      sd_sb    <= '0;
      sd       <= '0;
    end else begin
      sd_valid <= busy && last && !kill[lid];
      if (busy && !kill[lid]) begin
        // write this chunk's results into SD
        for (int e = 0; e < W; e++) begin
          if (bypass) begin
            sd[e] <= win[16*e +: 16];
          end else if (e >= int'(chunk) * int'(lq) && e < (int'(chunk) + 1) * int'(lq)) begin
            sd[e] <= vals[e - int'(chunk) * int'(lq)];
          end
        end
        if (last) begin
          sd_lid <= lid;
          sd_sb  <= sb;
        end else begin
          chunk <= chunk + 1'b1;
          win   <= win >> (int'(lq) * int'(cfg_qbits));
        end
      end
      if (accept) begin
        busy    <= 1'b1;
        chunk   <= '0;
        nchunks <= CH'(nch_in);
        win     <= in_win;
        lid     <= in_lid;
        sb      <= in_sb;
      end else if (last || (busy && kill[lid])) begin
        busy <= 1'b0;
      end
    end
  end

  // The window is never wider than the vector.
  assert property (@(posedge clk) disable iff (!rst_n) in_valid |-> in_wnd <= NW'(W))
    else $error("dequant: window larger than W");
endmodule
