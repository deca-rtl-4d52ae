// deca_ctrl_regs: DECA's memory-mapped control registers.
//
// The core configures a DECA with privileged stores: one configuration word
// (code width, sparsity on/off, scaling on/off, group size) and the 256
// entries of the dequantization table, which are forwarded to the LUT array as
// they are written. The configuration, a status word and every LUT entry can
// be read back, so the OS can save and restore a DECA's state (control
// registers and LUTs) on a context switch.
//
// Register map (word addresses, 32-bit data):
//   0x000  CFG     [4:0] qbits (1..8, or 16 for BF16), [8] sparse_en,
//                  [9] scale_en, [15:12] group_log2
//   0x001  STATUS  read only: [1:0] loader busy, [3:2] TOut valid
//   0x100 + n  LUT entry n (n = 0..255), [15:0] BF16 value, read and write
// Interface: wr_en/wr_addr/wr_data, rd_addr -> rd_data (combinational); cfg
// (registered), lut_we/lut_waddr/lut_wdata (one-cycle pulse per store),
// lut_raddr -> lut_rdata (LUT read-back, combinational).
//
// That the core writes control registers and fills the LUTs with stores is
// the paper's; the register map is this design's own.
module deca_ctrl_regs (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  wr_en,
  input  logic [9:0]            wr_addr,
  input  logic [31:0]           wr_data,
  input  logic [9:0]            rd_addr,
  output logic [31:0]           rd_data,
  input  logic [3:0]            status,
  output deca_pkg::deca_cfg_t   cfg,
  output logic                  lut_we,
  output logic [7:0]            lut_waddr,
  output deca_pkg::bf16_t       lut_wdata,
  output logic [7:0]            lut_raddr,
  input  deca_pkg::bf16_t       lut_rdata
);
  import deca_pkg::*;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg <= '{qbits: 5'd8, sparse_en: 1'b0, scale_en: 1'b0, group_log2: 4'd5};
    end else if (wr_en && wr_addr == 10'h000) begin
      cfg <= '{qbits: wr_data[4:0], sparse_en: wr_data[8], scale_en: wr_data[9],
               group_log2: wr_data[15:12]};
    end
  end

  assign lut_we    = wr_en && (wr_addr[9:8] == 2'b01);
  assign lut_waddr = wr_addr[7:0];
  assign lut_wdata = wr_data[15:0];

  assign lut_raddr = rd_addr[7:0];

  always_comb begin
    if (rd_addr == 10'h000)
      rd_data = {16'd0, cfg.group_log2, 2'b00, cfg.scale_en, cfg.sparse_en, 3'b000, cfg.qbits};
    else if (rd_addr == 10'h001)
      rd_data = {28'd0, status};
    else if (rd_addr[9:8] == 2'b01)
      rd_data = {16'd0, lut_rdata};
    else
      rd_data = '0;
  end
endmodule
