// deca_bf16_mul: BF16 x BF16 multiplier of the Scaling stage.
//
// Multiplies two bfloat16 numbers (1 sign, 8 exponent, 7 fraction bits): the
// 8x8-bit significand product is normalised and rounded to nearest, ties to
// even. Subnormal inputs and results are flushed to signed zero; results past
// the largest finite value become infinity; NaN in, or 0 x infinity, gives the
// quiet NaN 0x7FC0. Combinational.
//
// Interface: a, b -> p.
//
// The paper only states that the Scaling stage uses BF16 multipliers; rounding
// and special-value handling are this design's choices.
module deca_bf16_mul (
  input  deca_pkg::bf16_t a,
  input  deca_pkg::bf16_t b,
  output deca_pkg::bf16_t p
);
  logic        sa, sb, sp;
  logic [7:0]  ea, eb;
  logic [6:0]  ma, mb;
  logic [15:0] prod;
  logic [9:0]  e;          // signed biased exponent with headroom
  logic [7:0]  m;          // 1 + 7 bits after rounding (bit 7 carry)
  logic        rnd, sticky;

  always_comb begin
    {sa, ea, ma} = a;
    {sb, eb, mb} = b;
    sp   = sa ^ sb;
    prod = {1'b1, ma} * {1'b1, mb};
    if (prod[15]) begin
      m      = {1'b0, prod[14:8]};
      rnd    = prod[7];
      sticky = |prod[6:0];
      e      = 10'(ea) + 10'(eb) - 10'd126;
    end else begin
      m      = {1'b0, prod[13:7]};
      rnd    = prod[6];
      sticky = |prod[5:0];
      e      = 10'(ea) + 10'(eb) - 10'd127;
    end
    if (rnd && (sticky || m[0])) m = m + 8'd1;
    if (m[7]) begin
      m = 8'd0;
      e = e + 10'd1;
    end

    if ((ea == 8'hFF && ma != '0) || (eb == 8'hFF && mb != '0)) p = 16'h7FC0;
    else if ((ea == 8'hFF && eb == 8'h00) || (eb == 8'hFF && ea == 8'h00)) p = 16'h7FC0;
    else if (ea == 8'hFF || eb == 8'hFF) p = {sp, 8'hFF, 7'd0};
    else if (ea == 8'h00 || eb == 8'h00) p = {sp, 15'd0};
    else if ($signed(e) >= 10'sd255)     p = {sp, 8'hFF, 7'd0};
    else if ($signed(e) <= 10'sd0)       p = {sp, 15'd0};
    else                                 p = {sp, e[7:0], m[6:0]};
  end
endmodule
