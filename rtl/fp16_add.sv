// fp16_add: combinational IEEE 754 half-precision adder.
//
// Used for the accumulation in every vector processing unit and for the
// combining of partial sums in the aggregator.  The operand with the larger
// magnitude keeps its significand; the other is shifted right inside a
// 24-bit window whose shifted-out bits collapse into a sticky bit, the two
// are added or subtracted, the result is normalised with a leading-one
// search and rounded to nearest, ties to even.  Same simplifications as
// fp16_mul: subnormals read as zero and results below 2^-14 flush to zero,
// infinities propagate, NaN is not produced.  Exact cancellation gives +0.
// Purely combinational.
module fp16_add (
  input  logic [15:0] a,
  input  logic [15:0] b,
  output logic [15:0] y
);
  logic [15:0] x, z;            // x: larger magnitude, z: smaller
  logic [4:0]  d;
  logic [23:0] mx, mz, mzs;
  logic        stk;
  logic [24:0] sum;
  logic [4:0]  lead;
  logic signed [7:0] e;
  logic [24:0] nrm;
  logic [10:0] sig;
  logic        g, st;
  logic [11:0] r;
  logic        a_zero, b_zero;

  always_comb begin
    a_zero = (a[14:10] == 5'd0);
    b_zero = (b[14:10] == 5'd0);
    if (a[14:0] >= b[14:0]) begin
      x = a; z = b;
    end else begin
      x = b; z = a;
    end
    d   = x[14:10] - z[14:10];
    mx  = {1'b1, x[9:0], 13'd0};
    mz  = {1'b1, z[9:0], 13'd0};
    mzs = mz >> d;
    stk = 1'b0;
    for (int i = 0; i < 24; i++)
      if (i < int'(d) && mz[i]) stk = 1'b1;
    mzs[0] = mzs[0] | stk;
    if (x[15] == z[15]) sum = {1'b0, mx} + {1'b0, mzs};
    else                sum = {1'b0, mx} - {1'b0, mzs};
    lead = 5'd0;
    for (int i = 0; i < 25; i++)
      if (sum[i]) lead = 5'(i);
    nrm = sum << (5'd24 - lead);
    e   = 8'(signed'({3'b000, x[14:10]})) + 8'(signed'({3'b000, lead})) - 8'sd23;
    sig = nrm[24:14];
    g   = nrm[13];
    st  = |nrm[12:0];
    r   = {1'b0, sig} + {11'd0, g & (st | sig[0])};
    if (r[11]) begin
      r = r >> 1;
      e = e + 8'sd1;
    end
    if (a_zero && b_zero)                        y = 16'd0;
    else if (a_zero)                             y = b;
    else if (b_zero)                             y = a;
    else if (x[14:10] == 5'd31)                  y = {x[15], 5'd31, 10'd0};
    else if (sum == 25'd0)                       y = 16'd0;
    else if (e >= 8'sd31)                        y = {x[15], 5'd31, 10'd0};
    else if (e <= 8'sd0)                         y = {x[15], 15'd0};
    else                                         y = {x[15], e[4:0], r[9:0]};
  end
endmodule
