// elu_lut: table look-up ELU for 16-bit quantised activations.
//
// ELU(x) = x for x >= 0 and exp(x) - 1 for x < 0. The positive side is passed
// through unchanged. For the negative side the input, which has `frac`
// fractional bits (4..14), is floored to a grid of step 1/16 and used to index
// a 128-entry table covering [-8, 0): the negative half of the paper's
// 256-entry [-8, 8] grid. Inputs below -8 return the end entry, as in the
// paper. The table holds round(16384 * (exp(-8 + k/16) - 1)), k = 0..127
// (rtl/elu_lut.hex), and the looked-up Q1.14 value is shifted with rounding
// back to the input's format. Combinational.
module elu_lut (
  input  logic signed [15:0] x,
  input  logic        [4:0]  frac,
  output logic signed [15:0] y
);
  logic [15:0] table_q [128];
  initial $readmemh("rtl/elu_lut.hex", table_q);

  logic signed [15:0] v;
  logic signed [16:0] k;
  logic        [6:0]  idx;
  logic signed [15:0] neg;
  logic        [4:0]  dsh, osh;

  assign dsh = (frac > 5'd4) ? frac - 5'd4 : 5'd0;
  assign osh = (frac < 5'd14) ? 5'd14 - frac : 5'd0;

  rshift_clip #(.IN_W(16), .OUT_W(16)) u_out (
    .din($signed(table_q[idx])), .r({1'b0, osh}), .dout(neg));

  always_comb begin
    v   = x >>> dsh;                     // floor to step 1/16
    k   = 17'(v) + 17'sd128;             // table index, may fall below 0
    idx = (k < 0) ? 7'd0 : (k > 17'sd127) ? 7'd127 : k[6:0];
    y   = x[15] ? neg : x;
  end
endmodule
