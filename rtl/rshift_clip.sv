// rshift_clip: the requantiser that ends every quantised operator.
//
// It computes clip(rshift(din, r)): an arithmetic right shift by r bits with
// rounding (2^(r-1) is added before the shift, i.e. round half up), followed by
// saturation to the signed OUT_W-bit activation range. The shift-with-rounding
// and the clip are the paper's; the rounding mode (half up) is this design's
// choice. Purely combinational.
module rshift_clip #(
  parameter int unsigned IN_W  = 48,
  parameter int unsigned OUT_W = 16
) (
  input  logic signed [IN_W-1:0]  din,
  input  logic        [5:0]       r,
  output logic signed [OUT_W-1:0] dout
);
  localparam logic signed [IN_W:0] MAXV = (IN_W+1)'((1 << (OUT_W-1)) - 1);
  localparam logic signed [IN_W:0] MINV = -(IN_W+1)'(1 << (OUT_W-1));

  logic signed [IN_W:0] ext, rnd, sh;

  always_comb begin
    ext = (IN_W+1)'(din);
    rnd = (r == 6'd0) ? '0 : ((IN_W+1)'(1) <<< (r - 6'd1));
    sh  = (ext + rnd) >>> r;
    if (sh > MAXV)      dout = MAXV[OUT_W-1:0];
    else if (sh < MINV) dout = MINV[OUT_W-1:0];
    else                dout = sh[OUT_W-1:0];
  end
endmodule
