// deca_tb_pkg: reference models shared by the DECA testbenches.
//
// - BF16 <-> real conversion and a BF16 multiply reference computed in double
//   precision and rounded to nearest-even (subnormals flushed to zero), written
//   independently of the RTL multiplier.
// - A compressed-tile generator: from a code width, a density and a seed it
//   draws a dense tile of codes, a bitmask, per-group E8M0 scales, packs the
//   three memory structures exactly as the DECA expects them (nonzero codes
//   LSB first, one bitmask bit per dense element, one scale byte per group)
//   and computes the expected dense BF16 tile from a dequantization table.
package deca_tb_pkg;
  import deca_pkg::*;

  function automatic real bf16_to_real(input bf16_t v);
    real m;
    int  e;
    if (v[14:7] == 8'd0) return 0.0;
    m = 1.0 + real'(v[6:0]) / 128.0;
    e = int'(v[14:7]) - 127;
    m = m * (2.0 ** e);
    return v[15] ? -m : m;
  endfunction

  function automatic bf16_t real_to_bf16(input real r);
    logic [63:0] b;
    logic        s;
    int          e;
    logic [51:0] f;
    logic [7:0]  m;
    logic        rb, st;
    if (r == 0.0) return 16'h0000;
    b = $realtobits(r);
    s = b[63];
    e = int'(b[62:52]) - 1023 + 127;
    f = b[51:0];
    m  = {1'b0, f[51:45]};
    rb = f[44];
    st = |f[43:0];
    if (rb && (st || m[0])) m = m + 1;
    if (m[7]) begin m = 0; e = e + 1; end
    if (e >= 255) return {s, 8'hFF, 7'd0};
    if (e <= 0)   return {s, 15'd0};
    return {s, 8'(e), m[6:0]};
  endfunction

  function automatic bf16_t ref_mul(input bf16_t a, input bf16_t b);
    if (a[14:7] == 8'hFF || b[14:7] == 8'hFF) return 16'h7FC0;  // not used by the tests
    return real_to_bf16(bf16_to_real(a) * bf16_to_real(b));
  endfunction

  // A random finite BF16 with a moderate exponent.
  function automatic bf16_t rand_bf16();
    logic [31:0] r;
    r = $urandom;
    return {r[15], 8'(8'd110 + 8'(r[4:0])), r[14:8]};
  endfunction

  typedef struct {
    int          qbits;        // 1..8 or 16
    bit          sparse;
    bit          scale;
    int          group_log2;
    int          nnz;
    logic [7:0]  data [1024];
    int          data_len;
    logic [7:0]  bm [64];
    int          bm_len;
    logic [7:0]  sf [64];
    int          sf_len;
    bf16_t       expect_tile [512];
  } ctile_t;

  // tbl[code] for codes of qbits bits (qbits = 16: value is the code)
  function automatic void make_tile(output ctile_t t, input int qbits, input int density_pct,
                                    input bit scale, input int group_log2,
                                    input bf16_t tbl[256]);
    int bitpos;
    int ngroups;
    t.qbits = qbits;
    t.sparse = (density_pct < 100);
    t.scale = scale;
    t.group_log2 = group_log2;
    t.nnz = 0;
    for (int i = 0; i < 1024; i++) t.data[i] = 0;
    for (int i = 0; i < 64; i++) begin t.bm[i] = 0; t.sf[i] = 0; end
    ngroups = 512 >> group_log2;
    for (int g = 0; g < ngroups; g++) t.sf[g] = 8'(120 + ($urandom % 14));
    bitpos = 0;
    for (int j = 0; j < 512; j++) begin
      bit nz;
      logic [15:0] code;
      bf16_t v;
      nz = !t.sparse || (($urandom % 100) < density_pct);
      if (nz) begin
        code = (qbits == 16) ? 16'(rand_bf16()) : 16'($urandom & ((1 << qbits) - 1));
        for (int b = 0; b < qbits; b++) begin
          t.data[(bitpos + b) / 8][(bitpos + b) % 8] = code[b];
        end
        bitpos += qbits;
        t.nnz++;
        t.bm[j / 8][j % 8] = 1'b1;
        v = (qbits == 16) ? bf16_t'(code) : tbl[code[7:0]];
        if (scale) v = ref_mul(v, {1'b0, t.sf[j >> group_log2], 7'd0});
      end else begin
        v = 16'h0000;
      end
      t.expect_tile[j] = v;
    end
    t.data_len = (bitpos + 7) / 8;
    if (t.data_len == 0) t.data_len = 1;
    t.bm_len = t.sparse ? 64 : 0;
    t.sf_len = scale ? ngroups : 0;
  endfunction

  // LUT contents for a code width: the table replicated as the sub-LUT
  // organisation requires.
  function automatic bf16_t lut_entry(input int qbits, input int n, input bf16_t tbl[256]);
    if (qbits >= 8) return tbl[n];
    if (qbits == 7) return tbl[n % 128];
    return tbl[n % 64];
  endfunction
endpackage
