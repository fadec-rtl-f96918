// axi_mem_model: behavioural DRAM behind an AXI4 slave port, for testbenches.
//
// 64-bit data, INCR bursts, one read and one write burst in flight. READY and
// VALID are withheld at random (one cycle in STALL_MOD, 0 = never) to exercise
// the master's handshakes. The array `mem` is indexed by 8-byte word and is
// read and written directly by testbenches. It also counts bursts.
module axi_mem_model #(
  parameter int unsigned WORDS    = 65536,
  parameter int unsigned STALL_MOD = 3
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [31:0] araddr,
  input  logic [7:0]  arlen,
  input  logic        arvalid,
  output logic        arready,
  output logic [63:0] rdata,
  output logic [1:0]  rresp,
  output logic        rlast,
  output logic        rvalid,
  input  logic        rready,
  input  logic [31:0] awaddr,
  input  logic [7:0]  awlen,
  input  logic        awvalid,
  output logic        awready,
  input  logic [63:0] wdata,
  input  logic [7:0]  wstrb,
  input  logic        wlast,
  input  logic        wvalid,
  output logic        wready,
  output logic [1:0]  bresp,
  output logic        bvalid,
  input  logic        bready
);
  logic [63:0] mem [WORDS];
  int rd_bursts = 0, wr_bursts = 0, protocol_errors = 0;

  logic        rbusy, wbusy;
  logic [31:0] ra, wa;
  logic [8:0]  rleft, wleft;
  logic        stall_r, stall_w;

  always_ff @(posedge clk) begin
    stall_r <= (STALL_MOD != 0) && ($urandom % STALL_MOD == 0);
    stall_w <= (STALL_MOD != 0) && ($urandom % STALL_MOD == 0);
  end

  assign arready = !rbusy && !stall_r;
  assign rvalid  = rbusy && !stall_r;
  assign rdata   = mem[32'(ra[31:3]) % WORDS];
  assign rlast   = (rleft == 9'd1);
  assign rresp   = 2'b00;
  assign awready = !wbusy && !bvalid && !stall_w;
  assign wready  = wbusy && !stall_w;
  assign bresp   = 2'b00;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rbusy <= 0; wbusy <= 0; bvalid <= 0;
      ra <= 0; wa <= 0; rleft <= 0; wleft <= 0;
    end else begin
      if (arvalid && arready) begin
        rbusy <= 1; ra <= araddr; rleft <= 9'(arlen) + 9'd1;
        rd_bursts <= rd_bursts + 1;
        if (araddr[11:0] + (12'(arlen) + 1) * 8 > 13'h1000 && araddr[11:0] != 0) protocol_errors <= protocol_errors + 1;
      end
      if (rvalid && rready) begin
        ra <= ra + 8;
        rleft <= rleft - 1;
        if (rleft == 1) rbusy <= 0;
      end
      if (awvalid && awready) begin
        wbusy <= 1; wa <= awaddr; wleft <= 9'(awlen) + 9'd1;
        wr_bursts <= wr_bursts + 1;
      end
      if (wvalid && wready) begin
        for (int b = 0; b < 8; b++) if (wstrb[b]) mem[32'(wa[31:3]) % WORDS][b*8 +: 8] <= wdata[b*8 +: 8];
        wa <= wa + 8;
        wleft <= wleft - 1;
        if (wlast != (wleft == 1)) protocol_errors <= protocol_errors + 1;
        if (wleft == 1) begin
          wbusy  <= 0;
          bvalid <= 1;
        end
      end
      if (bvalid && bready) bvalid <= 0;
    end
  end
endmodule
