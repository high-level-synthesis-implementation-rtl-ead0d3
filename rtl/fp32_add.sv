// fp32_add: combinational IEEE-754 single-precision adder.
//
// Stands for the adder half of a floating-point DSP block (the chained
// accumulation stage of a dot product). The operand of smaller magnitude is
// shifted right with guard, round and sticky bits, the significands are added
// or subtracted, the sum is renormalised with a leading-zero count and rounded
// to nearest, ties to even. Subnormal inputs read as zero, subnormal results
// flush to zero, an exact cancellation gives +0, overflow gives infinity,
// NaN or inf-inf gives the canonical quiet NaN. These rules are this design's
// choice; the paper only says the DSP blocks add single-precision values.
module fp32_add
  import mmm_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t s
);
  logic        sa, sb, s_big, s_sml;
  logic [7:0]  ea, eb, e_big, e_sml, d;
  logic [22:0] ma, mb;
  logic [26:0] m_big, m_sml, m_shf;   // hidden bit, 23 bits, guard, round, sticky
  logic [27:0] sum;
  logic [26:0] norm;
  logic [4:0]  lz;
  logic        found, rnd, a_larger;
  logic [24:0] mant_r;
  logic signed [10:0] exp_s;

  always_comb begin
    {sa, ea, ma} = a;
    {sb, eb, mb} = b;
    a_larger = {ea, (ea == 8'h00) ? 23'd0 : ma} >= {eb, (eb == 8'h00) ? 23'd0 : mb};
    if (a_larger) begin
      s_big = sa; e_big = ea; m_big = (ea == 8'h00) ? 27'd0 : {1'b1, ma, 3'b000};
      s_sml = sb; e_sml = eb; m_sml = (eb == 8'h00) ? 27'd0 : {1'b1, mb, 3'b000};
    end else begin
      s_big = sb; e_big = eb; m_big = (eb == 8'h00) ? 27'd0 : {1'b1, mb, 3'b000};
      s_sml = sa; e_sml = ea; m_sml = (ea == 8'h00) ? 27'd0 : {1'b1, ma, 3'b000};
    end
    d = e_big - e_sml;
    if (d >= 8'd27) begin
      m_shf = {26'd0, |m_sml};
    end else begin
      m_shf = m_sml >> d;
      m_shf[0] = m_shf[0] | |(m_sml & ~(27'h7FF_FFFF << d));
    end
    sum   = (s_big == s_sml) ? {1'b0, m_big} + {1'b0, m_shf}
                             : {1'b0, m_big} - {1'b0, m_shf};
    exp_s = $signed({3'b000, e_big});
    lz    = 5'd0;
    found = 1'b0;
    if (sum[27]) begin
      norm  = sum[27:1];
      norm[0] = norm[0] | sum[0];
      exp_s = exp_s + 11'sd1;
    end else begin
      for (int i = 26; i >= 0; i--) begin
        if (!found && sum[i]) begin
          found = 1'b1;
          lz    = 5'(26 - i);
        end
      end
      norm  = sum[26:0] << lz;
      exp_s = exp_s - $signed({6'd0, lz});
    end
    rnd    = norm[2] & ((|norm[1:0]) | norm[3]);
    mant_r = {1'b0, norm[26:3]} + {24'd0, rnd};
    if (mant_r[24]) begin
      mant_r = mant_r >> 1;
      exp_s  = exp_s + 11'sd1;
    end

    if ((ea == 8'hFF && ma != 0) || (eb == 8'hFF && mb != 0))
      s = 32'h7FC0_0000;
    else if (ea == 8'hFF && eb == 8'hFF)
      s = (sa == sb) ? a : 32'h7FC0_0000;
    else if (ea == 8'hFF)
      s = a;
    else if (eb == 8'hFF)
      s = b;
    else if (sum == 28'd0)
      s = (sa & sb) ? 32'h8000_0000 : 32'h0000_0000;
    else if (exp_s >= 11'sd255)
      s = {s_big, 8'hFF, 23'd0};
    else if (exp_s <= 11'sd0)
      s = {s_big, 31'd0};
    else
      s = {s_big, exp_s[7:0], mant_r[22:0]};
  end
endmodule
