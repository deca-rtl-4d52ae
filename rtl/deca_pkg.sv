// deca_pkg: constants and types shared by the DECA decompression accelerator.
//
// A DECA PE turns a compressed weight tile (quantized nonzero array, bitmask,
// per-group scale factors) into a dense 16x32 BF16 tile for the core's matrix
// unit. The vector width W (elements per vOp) and the number of 256-entry
// lookup tables L take the evaluated configuration W=32, L=8. A tile is 512
// elements (16 rows of 32 BF16), a cache line is 64 bytes.
//
// Tile metadata follows the paper's description (base address and length of
// each of the three structures). Address width, length width and the
// configuration encoding are this design's own choices.
package deca_pkg;

  // ---- sizes --------------------------------------------------------------
  localparam int unsigned W_DEF       = 32;   // elements produced per vOp
  localparam int unsigned L_DEF       = 8;    // number of "big" LUTs
  localparam int unsigned TILE_ELEMS  = 512;  // 16 rows x 32 BF16 elements
  localparam int unsigned TILE_ROWS   = 16;
  localparam int unsigned ROW_ELEMS   = 32;
  localparam int unsigned LINE_BYTES  = 64;
  localparam int unsigned LINE_BITS   = LINE_BYTES * 8;
  localparam int unsigned ADDR_W      = 48;   // virtual address bits
  localparam int unsigned LEN_W       = 16;   // structure length in bytes
  localparam int unsigned LUT_ENTRIES = 256;
  localparam int unsigned NUM_LOADERS = 2;

  typedef logic [ADDR_W-1:0] addr_t;
  typedef logic [LEN_W-1:0]  len_t;
  typedef logic [15:0]       bf16_t;
  typedef logic [LINE_BITS-1:0] line_t;

  // The three structures of a compressed tile.
  typedef enum logic [1:0] {
    STRUCT_DATA  = 2'd0,   // packed Q-bit nonzero array -> SQQ
    STRUCT_BMASK = 2'd1,   // 1 bit per dense element    -> Bitmask Queue
    STRUCT_SCALE = 2'd2    // 8-bit E8M0 scale per group -> Scale Factor Queue
  } struct_e;

  // Metadata passed by the core on invocation (store or TEPL).
  typedef struct packed {
    addr_t data_base;
    len_t  data_len;
    addr_t bm_base;
    len_t  bm_len;
    addr_t sf_base;
    len_t  sf_len;
  } tile_meta_t;

  // Decompression configuration held in the control registers.
  typedef struct packed {
    logic [4:0] qbits;       // 1..8 quantized bits; 16 = BF16, LUT bypassed
    logic       sparse_en;   // bitmask expansion on
    logic       scale_en;    // group scaling on
    logic [3:0] group_log2;  // log2(group size in elements), >= log2(W)
  } deca_cfg_t;

  // L2 request / response. Tag = {loader, epoch, ldq entry}.
  localparam int unsigned TAG_W = 8;
  typedef struct packed {
    addr_t            addr;      // line aligned
    logic             prefetch;  // 1: prefetch into L2, no response
    logic [TAG_W-1:0] tag;
  } mem_req_t;

  typedef struct packed {
    line_t            data;
    logic [TAG_W-1:0] tag;
  } mem_resp_t;

  // Lookups per big LUT per cycle for a given bit width (Lq / L).
  function automatic int unsigned reads_per_lut(input logic [4:0] qbits);
    if (qbits >= 5'd8) return 1;
    else if (qbits == 5'd7) return 2;
    else return 4;
  endfunction

endpackage
