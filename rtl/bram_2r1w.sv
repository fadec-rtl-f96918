// bram_2r1w: on-chip buffer memory (block RAM), used both as the data memory
// that holds activations and as the parameter memory that holds weights and
// biases.
//
// DEPTH words of WIDTH bits, two read ports with one cycle of latency and one
// write port with a write enable per 16-bit lane. A read and a write of the
// same address in one cycle return the old word. The paper gives only the
// total block-RAM use of the accelerator; the split into a 512 KiB data memory
// and a 128 KiB parameter memory is this design's choice (set by the top).
module bram_2r1w #(
  parameter int unsigned DEPTH = 65536,
  parameter int unsigned WIDTH = 64,
  parameter int unsigned LANE_W = 16,
  localparam int unsigned AW = $clog2(DEPTH),
  localparam int unsigned NL = WIDTH / LANE_W
) (
  input  logic             clk,
  input  logic             ra_en,
  input  logic [AW-1:0]    ra_addr,
  output logic [WIDTH-1:0] ra_data,
  input  logic             rb_en,
  input  logic [AW-1:0]    rb_addr,
  output logic [WIDTH-1:0] rb_data,
  input  logic             w_en,
  input  logic [NL-1:0]    w_lane,
  input  logic [AW-1:0]    w_addr,
  input  logic [WIDTH-1:0] w_data
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (ra_en) ra_data <= mem[ra_addr];
    if (rb_en) rb_data <= mem[rb_addr];
    if (w_en)
      for (int i = 0; i < NL; i++)
        if (w_lane[i]) mem[w_addr][i*LANE_W +: LANE_W] <= w_data[i*LANE_W +: LANE_W];
  end
endmodule
