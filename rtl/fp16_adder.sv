// fp16_adder: half-precision floating-point adder of the precision-scalable adder.
//
// Stages, in the order of the paper's adder figure: unpack, sign decide (the larger
// magnitude gives the sign), aligner (the smaller operand is shifted right by the exponent
// difference, keeping guard, round and sticky bits), mantissa adder (add or subtract),
// normalise (one right shift on carry-out or a left shift by the leading-zero count),
// exponent adjust and pack with round to nearest even.
// Corner cases are this design's own: subnormal inputs are read as zero and subnormal
// results are flushed to zero, overflow gives infinity, invalid operations give 0x7E00,
// an exact cancellation gives +0. Fully combinational.
module fp16_adder
  import ps_pkg::*;
(
  input  logic [15:0] a,
  input  logic [15:0] b,
  output logic [15:0] s
);
  always_comb begin
    logic        sa, sb, sl, ss;
    logic [4:0]  ea, eb, el, es;
    logic [9:0]  fa, fb;
    logic [10:0] ml, ms;
    logic        a_zero, b_zero, a_inf, b_inf, a_nan, b_nan;
    logic [4:0]  d;
    logic [40:0] sh;
    logic [13:0] ax, bx;
    logic [14:0] sum;
    logic [13:0] nrm;
    logic [3:0]  lz;
    logic signed [8:0] e;
    logic [10:0] sig;
    logic [2:0]  grs;
    logic        found;

    {sa, ea, fa} = a;
    {sb, eb, fb} = b;
    a_zero = (ea == 5'd0);
    b_zero = (eb == 5'd0);
    a_inf  = (ea == 5'h1F) && (fa == 10'd0);
    b_inf  = (eb == 5'h1F) && (fb == 10'd0);
    a_nan  = (ea == 5'h1F) && (fa != 10'd0);
    b_nan  = (eb == 5'h1F) && (fb != 10'd0);

    // sign decide: order the operands by magnitude
    if ({ea, fa} >= {eb, fb}) begin
      sl = sa; el = ea; ml = {1'b1, fa};
      ss = sb; es = eb; ms = {1'b1, fb};
    end else begin
      sl = sb; el = eb; ml = {1'b1, fb};
      ss = sa; es = ea; ms = {1'b1, fa};
    end

    // aligner
    d  = el - es;
    sh = {ms, 30'd0} >> d;
    ax = {ml, 3'b000};
    bx = {sh[40:28], |sh[27:0]};

    // mantissa adder
    if (sl ^ ss) sum = {1'b0, ax} - {1'b0, bx};
    else         sum = {1'b0, ax} + {1'b0, bx};

    // normalise and exponent adjust
    nrm = 14'd0;
    lz = 4'd0;
    found = 1'b0;
    for (int i = 13; i >= 0; i--) begin
      if (!found && sum[i]) found = 1'b1;
      else if (!found) lz = lz + 4'd1;
    end
    if (sum[14]) begin
      sig = sum[14:4];
      grs = {sum[3], sum[2], sum[1] | sum[0]};
      e   = 9'(el) + 9'sd1;
    end else begin
      nrm = sum[13:0] << lz;
      sig = nrm[13:3];
      grs = nrm[2:0];
      e   = 9'(el) - 9'(lz);
    end

    // pack, with special cases
    if (a_nan || b_nan || (a_inf && b_inf && (sa != sb))) s = FP16_QNAN;
    else if (a_inf)                 s = a;
    else if (b_inf)                 s = b;
    else if (a_zero && b_zero)      s = {sa & sb, 15'd0};
    else if (a_zero)                s = b;
    else if (b_zero)                s = a;
    else if (sum == 15'd0)          s = 16'd0;
    else                            s = fp16_round_pack(sl, e, sig, grs);
  end
endmodule
