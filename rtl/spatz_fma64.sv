// Double-precision fused multiply-add, r = a * b + c, with a single rounding to nearest-even.
//
// This is the arithmetic core of one FPU lane of the vector arithmetic unit. The paper uses an
// existing transprecision FPU (fp8/16/32/64, packed SIMD, ExSdotp) that it does not describe;
// this module is this design's own, minimal stand-in that covers the fp64 FMA the paper's
// evaluation rests on. vfadd and vfmul are mapped onto it by the caller (b = 1.0, c = -0.0).
// Method: the 106-bit product and the aligned 53-bit addend are summed exactly in a 222-bit
// window (bits shifted out below the window fold into one sticky bit), the sum is normalised
// with a leading-one search and rounded once.
// Simplifications (own choices): subnormal inputs are read as zero and results below the
// normal range flush to signed zero; every NaN result is the canonical quiet NaN; no
// exception flags. The unit is purely combinational; the VAU places the four pipeline
// registers the paper quotes for its FMA behind it.
module spatz_fma64 (
  input  logic [63:0] a_i,
  input  logic [63:0] b_i,
  input  logic [63:0] c_i,
  output logic [63:0] r_o
);

  localparam int unsigned WW = 222;
  localparam logic [63:0] QNAN = 64'h7FF8_0000_0000_0000;

  logic        sa, sb, sc, sp;
  logic [10:0] ea, eb, ec;
  logic [51:0] fa, fb, fc;
  logic        za, zb, zc, ia, ib, ic, na, nb, nc;
  logic [52:0] ma, mb, mc;
  logic [105:0] prod;

  assign {sa, ea, fa} = a_i;
  assign {sb, eb, fb} = b_i;
  assign {sc, ec, fc} = c_i;
  assign sp = sa ^ sb;
  assign za = (ea == 11'd0);   // zero or subnormal (read as zero)
  assign zb = (eb == 11'd0);
  assign zc = (ec == 11'd0);
  assign ia = (ea == 11'h7FF) && (fa == '0);
  assign ib = (eb == 11'h7FF) && (fb == '0);
  assign ic = (ec == 11'h7FF) && (fc == '0);
  assign na = (ea == 11'h7FF) && (fa != '0);
  assign nb = (eb == 11'h7FF) && (fb != '0);
  assign nc = (ec == 11'h7FF) && (fc != '0);
  assign ma = {1'b1, fa};
  assign mb = {1'b1, fb};
  assign mc = {1'b1, fc};
  assign prod = ma * mb;

  always_comb begin
    logic [WW-1:0] pw, cw, sum, norm;
    logic          s_res, stk, g, st, rnd;
    logic [52:0]   mant;
    logic [53:0]   mant_r;
    int            d, sh, msb, e;

    r_o   = '0;
    pw    = '0;
    cw    = '0;
    sum   = '0;
    norm  = '0;
    s_res = 1'b0;
    stk   = 1'b0;
    g     = 1'b0;
    st    = 1'b0;
    rnd   = 1'b0;
    mant  = '0;
    mant_r = '0;
    msb   = 0;
    e     = 0;
    d     = int'(ec) - int'(ea) - int'(eb) + 1075;
    sh    = 0;

    if (na || nb || nc || ((ia || ib) && (za || zb)) ||
        ((ia || ib) && ic && (sp != sc))) begin
      r_o = QNAN;
    end else if (ia || ib) begin
      r_o = {sp, 11'h7FF, 52'd0};
    end else if (ic) begin
      r_o = c_i;
    end else if (za || zb) begin
      // Product is zero: the result is c (or a signed zero).
      if (zc) r_o = {sp & sc, 63'd0};
      else    r_o = c_i;
    end else if (!zc && d > 108) begin
      // Addend so much larger that the product is below a quarter ulp of it.
      r_o = c_i;
    end else begin
      pw[56 +: 106] = prod;
      if (!zc) begin
        if (d >= -55) begin
          cw[56 + d +: 53] = mc;
        end else begin
          sh = -55 - d;   // right shift of the addend placed at bit 1
          if (sh >= 53) begin
            stk = 1'b1;
          end else begin
            cw[1 +: 53] = mc >> sh;
            stk = |(mc & ((53'd1 << sh) - 53'd1));
          end
          cw[0] = stk;
        end
      end
      if (sp == sc || zc) begin
        sum   = pw + cw;
        s_res = sp;
      end else if (pw >= cw) begin
        sum   = pw - cw;
        s_res = sp;
      end else begin
        sum   = cw - pw;
        s_res = sc;
      end
      if (sum == '0) begin
        r_o = 64'd0; // exact cancellation gives +0 under round-to-nearest
      end else begin
        for (int i = 0; i < int'(WW); i++) if (sum[i]) msb = i;
        norm   = sum << (WW - 1 - msb);
        mant   = norm[WW-1 -: 53];
        g      = norm[WW-54];
        st     = |norm[WW-55:0];
        rnd    = g && (st || mant[0]);
        mant_r = {1'b0, mant} + 54'(rnd);
        e      = int'(ea) + int'(eb) + msb - 1183;
        if (mant_r[53]) begin
          mant_r = mant_r >> 1;
          e      = e + 1;
        end
        if (e >= 2047)   r_o = {s_res, 11'h7FF, 52'd0};
        else if (e <= 0) r_o = {s_res, 63'd0};
        else             r_o = {s_res, 11'(e), mant_r[51:0]};
      end
    end
  end

endmodule
