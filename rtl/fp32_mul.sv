// fp32_mul: combinational IEEE-754 single-precision multiplier.
//
// Stands for the multiplier half of a floating-point DSP block. The 24x24-bit
// significand product is normalised by at most one position and rounded to
// nearest, ties to even. Subnormal inputs are read as zero and results that
// would be subnormal are flushed to a signed zero (flush-to-zero); a result
// too large becomes infinity; an infinity or NaN operand gives infinity or the
// canonical quiet NaN (0 times infinity gives NaN). These rounding and special
// value rules are this design's choice; the FPGA's DSP blocks are only said to
// compute single-precision products. No clock: the enclosing dot product unit
// registers the result.
module fp32_mul
  import mmm_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t p
);
  logic        sa, sb, sp;
  logic [7:0]  ea, eb;
  logic [22:0] ma, mb;
  logic [47:0] prod;
  logic [23:0] mant;       // 1 + 23 bits incl. hidden bit before rounding
  logic        guard, sticky, rnd;
  logic [24:0] mant_r;
  logic signed [10:0] exp_s;

  always_comb begin
    {sa, ea, ma} = a;
    {sb, eb, mb} = b;
    sp    = sa ^ sb;
    prod  = {1'b1, ma} * {1'b1, mb};
    exp_s = $signed({3'b000, ea}) + $signed({3'b000, eb}) - 11'sd127;
    if (prod[47]) begin
      mant   = prod[47:24];
      guard  = prod[23];
      sticky = |prod[22:0];
      exp_s  = exp_s + 11'sd1;
    end else begin
      mant   = prod[46:23];
      guard  = prod[22];
      sticky = |prod[21:0];
    end
    rnd    = guard & (sticky | mant[0]);
    mant_r = {1'b0, mant} + {24'd0, rnd};
    if (mant_r[24]) begin
      mant_r = mant_r >> 1;
      exp_s  = exp_s + 11'sd1;
    end

    if ((ea == 8'hFF && ma != 0) || (eb == 8'hFF && mb != 0))
      p = 32'h7FC0_0000;                                 // NaN operand
    else if ((ea == 8'hFF && eb == 8'h00) || (eb == 8'hFF && ea == 8'h00))
      p = 32'h7FC0_0000;                                 // inf * 0
    else if (ea == 8'hFF || eb == 8'hFF)
      p = {sp, 8'hFF, 23'd0};                            // inf operand
    else if (ea == 8'h00 || eb == 8'h00)
      p = {sp, 31'd0};                                   // zero / flushed subnormal
    else if (exp_s >= 11'sd255)
      p = {sp, 8'hFF, 23'd0};                            // overflow
    else if (exp_s <= 11'sd0)
      p = {sp, 31'd0};                                   // underflow, flushed
    else
      p = {sp, exp_s[7:0], mant_r[22:0]};
  end
endmodule
