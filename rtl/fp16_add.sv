// fp16_add: combinational IEEE 754 binary16 adder, round to nearest even.
//
// Used by every lane of the near-bank ALU (nmc_alu) to reduce FP16 partial
// outputs in memory. The paper trains and infers with FP16 tensors and reduces
// them near memory; it does not describe the adder, so this one is the design's
// own: align the smaller operand with a sticky bit, add or subtract in a 25-bit
// field, normalise (subnormals supported), round to nearest even.
// Special cases: any NaN input, or inf + -inf, gives the quiet NaN 16'h7E00;
// exact cancellation gives +0 (only -0 + -0 gives -0); overflow gives inf.
// Timing: purely combinational.
module fp16_add (
  input  logic [15:0] a,
  input  logic [15:0] b,
  output logic [15:0] y
);
  logic        sa, sb, sub, s_big;
  logic [4:0]  ea, eb;
  logic [9:0]  fa, fb;
  logic        a_nan, b_nan, a_inf, b_inf;
  logic [14:0] mag_a, mag_b;
  logic [10:0] m_big, m_sml;
  logic [5:0]  e_big, e_sml;
  logic [5:0]  d;
  logic [23:0] sml_full, sml_sh;
  logic        sticky;
  logic [24:0] sum;
  logic [24:0] nrm;
  logic [6:0]  e_res;
  logic [4:0]  lz;
  logic [4:0]  shl;
  logic [11:0] mant_r;
  logic        rnd_up;
  logic        found;

  always_comb begin
    sa = a[15]; sb = b[15];
    ea = a[14:10]; eb = b[14:10];
    fa = a[9:0];  fb = b[9:0];
    a_nan = (ea == 5'h1f) && (fa != '0);
    b_nan = (eb == 5'h1f) && (fb != '0);
    a_inf = (ea == 5'h1f) && (fa == '0);
    b_inf = (eb == 5'h1f) && (fb == '0);
    mag_a = a[14:0];
    mag_b = b[14:0];
    sub   = sa ^ sb;

    // order operands by magnitude
    if (mag_a >= mag_b) begin
      s_big = sa;
      m_big = {(ea != 0), fa}; e_big = (ea == 0) ? 6'd1 : {1'b0, ea};
      m_sml = {(eb != 0), fb}; e_sml = (eb == 0) ? 6'd1 : {1'b0, eb};
    end else begin
      s_big = sb;
      m_big = {(eb != 0), fb}; e_big = (eb == 0) ? 6'd1 : {1'b0, eb};
      m_sml = {(ea != 0), fa}; e_sml = (ea == 0) ? 6'd1 : {1'b0, ea};
    end

    // align: 11 mantissa bits, 13 guard bits below them
    d        = e_big - e_sml;
    sml_full = {m_sml, 13'b0};
    if (d >= 6'd24) begin
      sml_sh = '0;
      sticky = (m_sml != '0);
    end else begin
      sml_sh = sml_full >> d;
      sticky = ((sml_full & ((24'd1 << d) - 24'd1)) != '0);
    end
    sml_sh[0] = sml_sh[0] | sticky;

    sum = sub ? ({1'b0, m_big, 13'b0} - {1'b0, sml_sh})
              : ({1'b0, m_big, 13'b0} + {1'b0, sml_sh});

    // normalise
    e_res = {1'b0, e_big};
    lz    = '0;
    shl   = '0;
    found = 1'b0;
    nrm   = sum;
    if (sum[24]) begin
      nrm   = {1'b0, sum[24:1]};
      nrm[0] = nrm[0] | sum[0];
      e_res = e_res + 7'd1;
    end else begin
      found = 1'b0;
      for (int i = 23; i >= 0; i--) begin
        if (!found && sum[i]) begin
          lz    = 5'(23 - i);
          found = 1'b1;
        end
      end
      // do not shift below the smallest normal exponent (gives a subnormal)
      shl   = ({2'b0, lz} >= e_res) ? 5'(e_res - 7'd1) : lz;
      nrm   = sum << shl;
      e_res = e_res - {2'b0, shl};
    end

    // round to nearest even: mantissa nrm[23:13], guard nrm[12], sticky nrm[11:0]
    rnd_up = nrm[12] && ((nrm[11:0] != '0) || nrm[13]);
    mant_r = {1'b0, nrm[23:13]} + {11'b0, rnd_up};
    if (mant_r[11]) begin
      mant_r = mant_r >> 1;
      e_res  = e_res + 7'd1;
    end

    if (a_nan || b_nan || (a_inf && b_inf && sub)) begin
      y = 16'h7e00;
    end else if (a_inf || b_inf) begin
      y = {(a_inf ? sa : sb), 5'h1f, 10'h0};
    end else if (sum == '0) begin
      y = {(sa & sb), 15'h0};
    end else if (e_res >= 7'd31) begin
      y = {s_big, 5'h1f, 10'h0};
    end else begin
      y = {s_big, (mant_r[10] ? e_res[4:0] : 5'd0), mant_r[9:0]};
    end
  end
endmodule
