// sigmoid_lut: table look-up sigmoid for 16-bit quantised activations.
//
// The input is first right-shifted (with rounding) by in_shift so that it has
// four fractional bits; one step of the table is then 1/16, which gives 256
// entries over [-8, 8], the table size and range of the paper. Only the
// non-negative half is stored (128 entries, sigmoid(k/16) for k = 0..127) and
// the negative half is produced from symmetry, sigmoid(-x) = 1 - sigmoid(x),
// as the paper suggests. Inputs beyond the table return its end value.
// The output is Q1.14 (1.0 = 16384), a format chosen by this design.
// Table: round(16384 / (1 + exp(-k/16))), k = 0..127, in rtl/sigmoid_lut.hex.
// Combinational (the table is a small ROM).
module sigmoid_lut (
  input  logic signed [15:0] x,
  input  logic        [4:0]  in_shift,
  output logic signed [15:0] y
);
  logic [15:0] table_q [128];
  initial $readmemh("rtl/sigmoid_lut.hex", table_q);

  logic signed [15:0] v;
  logic        [16:0] mag;
  logic        [6:0]  idx;

  rshift_clip #(.IN_W(16), .OUT_W(16)) u_in (.din(x), .r({1'b0, in_shift}), .dout(v));

  always_comb begin
    mag = v[15] ? 17'(-$signed({v[15], v})) : 17'(v);
    idx = (mag > 17'd127) ? 7'd127 : mag[6:0];
    y   = v[15] ? $signed(16'd16384 - table_q[idx]) : $signed(table_q[idx]);
  end
endmodule
