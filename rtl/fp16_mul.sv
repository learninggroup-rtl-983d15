// fp16_mul: combinational IEEE 754 half-precision multiplier.
//
// The accelerator computes in half precision; each vector processing unit
// has one of these.  Product of the two 11-bit significands (22 bits) is
// normalised and rounded to nearest, ties to even.  Simplifications chosen
// for this design: subnormal inputs are read as zero and results below the
// smallest normal number (2^-14) are flushed to a signed zero; an infinite
// input or an overflow gives a signed infinity; NaN inputs are not
// distinguished from infinity.  Purely combinational, no clock.
module fp16_mul (
  input  logic [15:0] a,
  input  logic [15:0] b,
  output logic [15:0] y
);
  logic        s;
  logic [4:0]  ea, eb;
  logic [10:0] ma, mb;
  logic [21:0] p;
  logic signed [7:0] e;
  logic [10:0] sig;
  logic        g, st;
  logic [11:0] r;

  always_comb begin
    s  = a[15] ^ b[15];
    ea = a[14:10];
    eb = b[14:10];
    ma = {1'b1, a[9:0]};
    mb = {1'b1, b[9:0]};
    p  = ma * mb;
    e  = 8'(signed'({3'b000, ea})) + 8'(signed'({3'b000, eb})) - 8'sd15;
    if (p[21]) begin
      sig = p[21:11];
      g   = p[10];
      st  = |p[9:0];
      e   = e + 8'sd1;
    end else begin
      sig = p[20:10];
      g   = p[9];
      st  = |p[8:0];
    end
    r = {1'b0, sig} + {11'd0, g & (st | sig[0])};
    if (r[11]) begin
      r = r >> 1;
      e = e + 8'sd1;
    end
    if (ea == 5'd31 || eb == 5'd31) y = {s, 5'd31, 10'd0};
    else if (ea == 5'd0 || eb == 5'd0) y = {s, 15'd0};
    else if (e >= 8'sd31) y = {s, 5'd31, 10'd0};
    else if (e <= 8'sd0) y = {s, 15'd0};
    else y = {s, e[4:0], r[9:0]};
  end
endmodule
