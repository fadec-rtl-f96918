// tb_dma_controller: loads blocks from the DRAM model into the data and the
// parameter memory and stores a block back, with random AXI stalls and
// lengths and start addresses that force 4 KiB page splits; compares every
// word and checks the number of bursts and the AXI burst rules.
module tb_dma_controller;
  import fadec_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, store, to_param, busy, done;
  logic [15:0] bram_addr;
  logic [31:0] dram_addr;
  logic [19:0] len;
  dwr_t dw; drd_t dr; word_t dr_q;
  logic pw_en; paddr_t pw_addr; word_t pw_data;
  logic [31:0] araddr, awaddr; logic [7:0] arlen, awlen; logic [2:0] arsize, awsize;
  logic [1:0] arburst, awburst, rresp, bresp;
  logic arvalid, arready, rlast, rvalid, rready, awvalid, awready, wlast, wvalid, wready, bvalid, bready;
  logic [63:0] rdata, wdata; logic [7:0] wstrb;
  logic [63:0] pshadow [4096];

  dma_controller dut (.clk, .rst_n, .start, .store, .to_param, .bram_addr, .dram_addr, .len,
    .busy, .done, .dw, .pw_en, .pw_addr, .pw_data, .dr, .dr_q,
    .m_axi_araddr(araddr), .m_axi_arlen(arlen), .m_axi_arsize(arsize), .m_axi_arburst(arburst),
    .m_axi_arvalid(arvalid), .m_axi_arready(arready), .m_axi_rdata(rdata), .m_axi_rresp(rresp),
    .m_axi_rlast(rlast), .m_axi_rvalid(rvalid), .m_axi_rready(rready),
    .m_axi_awaddr(awaddr), .m_axi_awlen(awlen), .m_axi_awsize(awsize), .m_axi_awburst(awburst),
    .m_axi_awvalid(awvalid), .m_axi_awready(awready), .m_axi_wdata(wdata), .m_axi_wstrb(wstrb),
    .m_axi_wlast(wlast), .m_axi_wvalid(wvalid), .m_axi_wready(wready), .m_axi_bresp(bresp),
    .m_axi_bvalid(bvalid), .m_axi_bready(bready));

  bram_2r1w #(.DEPTH(4096)) u_dmem (.clk, .ra_en(dr.en), .ra_addr(dr.addr[11:0]), .ra_data(dr_q),
    .rb_en(1'b0), .rb_addr('0), .rb_data(), .w_en(dw.en), .w_lane(dw.lane_en),
    .w_addr(dw.addr[11:0]), .w_data(dw.data));

  always_ff @(posedge clk) if (pw_en) pshadow[pw_addr[11:0]] <= pw_data;

  axi_mem_model #(.WORDS(8192), .STALL_MOD(3)) u_ddr (.clk, .rst_n, .araddr, .arlen, .arvalid,
    .arready, .rdata, .rresp, .rlast, .rvalid, .rready, .awaddr, .awlen, .awvalid, .awready,
    .wdata, .wstrb, .wlast, .wvalid, .wready, .bresp, .bvalid, .bready);

  task automatic xfer(bit st, bit tp, int ba, int da, int n, output int cyc);
    @(negedge clk);
    start = 1; store = st; to_param = tp; bram_addr = 16'(ba); dram_addr = 32'(da); len = 20'(n);
    @(negedge clk);
    start = 0;
    cyc = 1;
    while (!done) begin
      @(negedge clk);
      cyc++;
    end
  endtask

  initial begin
    int cyc, n, da, ba, b0;
    start = 0; store = 0; to_param = 0; bram_addr = 0; dram_addr = 0; len = 0;
    for (int a = 0; a < 8192; a++) u_ddr.mem[a] = {$urandom, $urandom};
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 6; rep++) begin
      // load to data memory
      n  = 1 + $urandom % 100;
      da = 8 * (480 + $urandom % 64);      // near a 4 KiB boundary (word 512)
      ba = $urandom % 1000;
      b0 = u_ddr.rd_bursts;
      xfer(0, 0, ba, da, n, cyc);
      for (int k = 0; k < n; k++) begin
        checks++;
        if (u_dmem.mem[ba + k] !== u_ddr.mem[da / 8 + k]) begin
          failures++;
          $display("FAIL load word %0d", k);
        end
      end
      begin
        int exp_b, rem, a;
        exp_b = 0; rem = n; a = da;
        while (rem > 0) begin
          int b;
          b = 16;
          if (b > rem) b = rem;
          if (b > (4096 - a % 4096) / 8) b = (4096 - a % 4096) / 8;
          exp_b++; rem -= b; a += 8 * b;
        end
        checks++;
        if (u_ddr.rd_bursts - b0 != exp_b) begin
          failures++;
          $display("FAIL bursts %0d expected %0d", u_ddr.rd_bursts - b0, exp_b);
        end
      end
      // load to parameter memory
      xfer(0, 1, 100, 8 * 2000, 40, cyc);
      for (int k = 0; k < 40; k++) begin
        checks++;
        if (pshadow[100 + k] !== u_ddr.mem[2000 + k]) failures++;
      end
      // store back to another DRAM area
      da = 8 * (4000 + $urandom % 100);
      xfer(1, 0, ba, da, n, cyc);
      for (int k = 0; k < n; k++) begin
        checks++;
        if (u_ddr.mem[da / 8 + k] !== u_dmem.mem[ba + k]) begin
          failures++;
          $display("FAIL store word %0d", k);
        end
      end
    end
    checks++;
    if (u_ddr.protocol_errors != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
