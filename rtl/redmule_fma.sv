// redmule_fma: combinational IEEE 754 binary16 fused multiply-add, r = a * b + c.
//
// The compute elements of the array are built around an FMA unit. This unit
// computes the exact sum a*b + c in a wide fixed-point integer (least
// significant bit weight 2^-48, enough for the product of two subnormals, and
// enough headroom for the largest finite product) and rounds it once, to nearest
// with ties to even. Subnormals are supported on input and output; overflow
// gives an infinity; invalid operations (inf*0, inf-inf, any NaN) give the
// canonical quiet NaN 0x7E00. An exact zero sum is +0 unless both addends are
// -0. No exception flags are produced. The unit is purely combinational: the
// pipeline registers live in the compute element around it. The algorithm is
// this design's own; only "an FMA per compute element" comes from the paper.
module redmule_fma (
  input  logic [15:0] a_i,
  input  logic [15:0] b_i,
  input  logic [15:0] c_i,
  output logic [15:0] r_o
);
  localparam int unsigned W = 84;  // magnitude width of the exact sum

  logic        sa, sb, sc, sp;
  logic [4:0]  ea, eb, ec;
  logic [10:0] ma, mb, mc;
  logic        a_nan, b_nan, c_nan, a_inf, b_inf, c_inf, a_zero, b_zero;
  logic [W-1:0] prod, addend, mag;
  logic        rs;
  logic [6:0]  lz, q;
  logic [W-1:0] kept;
  logic        rnd, sticky;
  logic [16:0] bits;

  always_comb begin
    sa = a_i[15]; sb = b_i[15]; sc = c_i[15];
    ea = a_i[14:10]; eb = b_i[14:10]; ec = c_i[14:10];
    // Significands with hidden bit; subnormals use exponent 1.
    ma = {(ea != 0), a_i[9:0]};
    mb = {(eb != 0), b_i[9:0]};
    mc = {(ec != 0), c_i[9:0]};
    a_nan = (ea == 5'h1f) && (a_i[9:0] != 0);
    b_nan = (eb == 5'h1f) && (b_i[9:0] != 0);
    c_nan = (ec == 5'h1f) && (c_i[9:0] != 0);
    a_inf = (ea == 5'h1f) && (a_i[9:0] == 0);
    b_inf = (eb == 5'h1f) && (b_i[9:0] == 0);
    c_inf = (ec == 5'h1f) && (c_i[9:0] == 0);
    a_zero = (a_i[14:0] == 0);
    b_zero = (b_i[14:0] == 0);
    sp = sa ^ sb;

    // value(a) = ma * 2^(max(ea,1) - 25); product LSB weight 2^-48.
    prod   = W'(ma * mb) << ((ea == 0 ? 7'd1 : 7'(ea)) + (eb == 0 ? 7'd1 : 7'(eb)) - 7'd2);
    addend = W'(mc) << ((ec == 0 ? 7'd1 : 7'(ec)) + 7'd23);

    // Exact signed sum as sign/magnitude.
    if (sp == sc) begin
      mag = prod + addend; rs = sp;
    end else if (prod >= addend) begin
      mag = prod - addend; rs = sp;
    end else begin
      mag = addend - prod; rs = sc;
    end

    // Leading one.
    lz = '0;
    for (int i = 0; i < W; i++) if (mag[i]) lz = 7'(i);

    // LSB index kept: 10 below the leading one, never below 2^-24 (bit 24).
    q = (lz > 7'd34) ? lz - 7'd10 : 7'd24;
    kept   = mag >> q;
    rnd    = mag[q - 7'd1];
    sticky = |(mag & ((W'(1) << (q - 7'd1)) - W'(1)));
    kept   = kept + {{(W-1){1'b0}}, (rnd & (sticky | kept[0]))};
    // Exponent field and significand combine by addition (carry on rounding up).
    bits   = 17'((17'(q) - 17'd24) << 10) + 17'(kept);

    if (a_nan || b_nan || c_nan || (a_inf && b_zero) || (b_inf && a_zero) ||
        ((a_inf || b_inf) && c_inf && (sp != sc))) begin
      r_o = 16'h7e00;
    end else if (a_inf || b_inf) begin
      r_o = {sp, 15'h7c00};
    end else if (c_inf) begin
      r_o = c_i;
    end else if (mag == 0) begin
      r_o = {(sp & sc), 15'h0};
    end else if (bits >= 17'h7c00) begin
      r_o = {rs, 15'h7c00};
    end else begin
      r_o = {rs, bits[14:0]};
    end
  end

endmodule
