// tb_fadec_top: end-to-end run of the accelerator at its default sizes.
//
// The testbench plays the CPU (AXI4-Lite register accesses, polling for
// extern requests) and the DRAM (axi_mem_model with random stalls). It loads
// a 19-stage list that uses every pipeline: DMA loads of activations and
// parameters, all five convolution units with ReLU, sigmoid and no
// activation, a skip-connection add with lshift, a lone rshift, upsampling, a
// two-input concatenation, a DMA store, an extern stage in which the CPU
// stand-in transforms the stored tensor in DRAM (halving every value, in
// place of a real software process), a DMA load of the result, the ConvLSTM
// cell and hidden pipelines and a final DMA store. The whole data memory and
// both DRAM result areas are compared with the golden model applied stage by
// stage, and every mechanism (each opcode, the extern hand-off, AXI stalls,
// multi-burst and page-split DMA, lane-masked writes) must have occurred.
module tb_fadec_top;
  import fadec_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [31:0] araddr, awaddr; logic [7:0] arlen, awlen; logic [2:0] arsize, awsize;
  logic [1:0] arburst, awburst, rresp, bresp;
  logic arvalid, arready, rlast, rvalid, rready, awvalid, awready, wlast, wvalid, wready, bvalid, bready;
  logic [63:0] rdata, wdata; logic [7:0] wstrb;
  logic [7:0] l_awaddr, l_araddr; logic l_awvalid, l_awready, l_wvalid, l_wready, l_bvalid, l_bready;
  logic l_arvalid, l_arready, l_rvalid, l_rready; logic [31:0] l_wdata, l_rdata; logic [1:0] l_bresp, l_rresp;
  logic irq;

  fadec_top dut (.clk, .rst_n,
    .m_axi_araddr(araddr), .m_axi_arlen(arlen), .m_axi_arsize(arsize), .m_axi_arburst(arburst),
    .m_axi_arvalid(arvalid), .m_axi_arready(arready), .m_axi_rdata(rdata), .m_axi_rresp(rresp),
    .m_axi_rlast(rlast), .m_axi_rvalid(rvalid), .m_axi_rready(rready),
    .m_axi_awaddr(awaddr), .m_axi_awlen(awlen), .m_axi_awsize(awsize), .m_axi_awburst(awburst),
    .m_axi_awvalid(awvalid), .m_axi_awready(awready), .m_axi_wdata(wdata), .m_axi_wstrb(wstrb),
    .m_axi_wlast(wlast), .m_axi_wvalid(wvalid), .m_axi_wready(wready), .m_axi_bresp(bresp),
    .m_axi_bvalid(bvalid), .m_axi_bready(bready),
    .s_axil_awaddr(l_awaddr), .s_axil_awvalid(l_awvalid), .s_axil_awready(l_awready),
    .s_axil_wdata(l_wdata), .s_axil_wvalid(l_wvalid), .s_axil_wready(l_wready),
    .s_axil_bresp(l_bresp), .s_axil_bvalid(l_bvalid), .s_axil_bready(l_bready),
    .s_axil_araddr(l_araddr), .s_axil_arvalid(l_arvalid), .s_axil_arready(l_arready),
    .s_axil_rdata(l_rdata), .s_axil_rresp(l_rresp), .s_axil_rvalid(l_rvalid),
    .s_axil_rready(l_rready), .irq);

  axi_mem_model #(.WORDS(16384), .STALL_MOD(3)) u_ddr (.clk, .rst_n, .araddr, .arlen, .arvalid,
    .arready, .rdata, .rresp, .rlast, .rvalid, .rready, .awaddr, .awlen, .awvalid, .awready,
    .wdata, .wstrb, .wlast, .wvalid, .wready, .bresp, .bvalid, .bready);

  // ---- CPU side: AXI4-Lite accesses ------------------------------------------
  task automatic wr(logic [7:0] a, logic [31:0] d);
    @(negedge clk);
    l_awaddr = a; l_wdata = d; l_awvalid = 1; l_wvalid = 1;
    #1;
    while (!(l_awready && l_wready)) @(negedge clk);
    @(negedge clk);
    l_awvalid = 0; l_wvalid = 0; l_bready = 1;
    while (!l_bvalid) @(negedge clk);
    @(negedge clk);
    l_bready = 0;
  endtask

  task automatic rd(logic [7:0] a, output logic [31:0] d);
    @(negedge clk);
    l_araddr = a; l_arvalid = 1;
    #1;
    while (!l_arready) @(negedge clk);
    @(negedge clk);
    l_arvalid = 0; l_rready = 1;
    while (!l_rvalid) @(negedge clk);
    d = l_rdata;
    @(negedge clk);
    l_rready = 0;
  endtask

  // ---- stage list --------------------------------------------------------------
  localparam int NST = 19;
  stage_t prog [NST];
  localparam int H = 6, W = 8;

  function automatic stage_t st(op_e op, int src0, int dst, int h, int w, int cin_g);
    stage_t s;
    s = '0;
    s.op = op; s.src0 = 16'(src0); s.dst = 16'(dst); s.h = 8'(h); s.w = 8'(w); s.cin_g = cg_t'(cin_g);
    return s;
  endfunction

  function automatic stage_t cv(conv_sel_e k, int src0, int dst, int h, int w, int paddr,
                                int oc_num, int oc_first, int cout_g, act_e act);
    stage_t s;
    s = st(OP_CONV, src0, dst, h, w, 2);
    s.conv_sel = k; s.paddr = 16'(paddr); s.oc_num = cg_t'(oc_num); s.oc_first = cg_t'(oc_first);
    s.cout_g = cg_t'(cout_g); s.act = act; s.scale = 8'sd3; s.sh0 = 5'd12; s.sh1 = 5'd8;
    return s;
  endfunction

  function automatic stage_t dma(op_e op, int bram, int dram_word, int len, bit to_param);
    stage_t s;
    s = '0;
    s.op = op; s.dst = 16'(bram); s.src0 = 16'(bram);
    s.dram_addr = 32'(dram_word * 8); s.len = 20'(len); s.dma_param = to_param;
    return s;
  endfunction

  initial begin
    prog[0]  = dma(OP_DMA_LOAD, 0, 500, H * W * 2, 0);   // crosses a 4 KiB page
    prog[1]  = dma(OP_DMA_LOAD, 0, 4096, 5 * 1024, 1);
    prog[2]  = cv(CONV_1_1, 0, 200, H, W, 0, 2, 0, 2, ACT_RELU);
    prog[3]  = cv(CONV_3_1, 200, 400, H, W, 1024, 2, 0, 2, ACT_NONE);
    prog[4]  = cv(CONV_3_2, 400, 600, H, W, 2048, 2, 1, 3, ACT_SIGMOID);
    prog[5]  = cv(CONV_5_1, 0, 800, H, W, 3072, 1, 0, 1, ACT_RELU);
    prog[6]  = cv(CONV_5_2, 0, 900, H, W, 4096, 1, 0, 1, ACT_NONE);
    prog[7]  = st(OP_ADD, 200, 1000, H, W, 2); prog[7].src1 = 16'd400; prog[7].la = 5'd1; prog[7].sh0 = 5'd1;
    prog[8]  = st(OP_RSHIFT, 1000, 1100, H, W, 2); prog[8].sh0 = 5'd2;
    prog[9]  = st(OP_UPSAMPLE, 900, 1200, H / 2, W / 2, 1);
    prog[10] = st(OP_COPY, 1200, 1300, H, W, 1); prog[10].oc_num = 10'd1; prog[10].cout_g = 10'd3;
    prog[11] = st(OP_COPY, 1100, 1300, H, W, 2); prog[11].oc_num = 10'd2; prog[11].oc_first = 10'd1;
               prog[11].cout_g = 10'd3;
    prog[12] = dma(OP_DMA_STORE, 1300, 12000, H * W * 3, 0);
    prog[13] = '0; prog[13].op = OP_EXTERN; prog[13].ext_op = 8'd7;
    prog[14] = dma(OP_DMA_LOAD, 1500, 13000, H * W * 3, 0);
    prog[15] = st(OP_LSTM_CELL, 1500, 1700, H, W, 1); prog[15].src1 = 16'd800;
               prog[15].sh1 = 5'd8; prog[15].sh2 = 5'd3; prog[15].sh3 = 5'd10; prog[15].sh0 = 5'd11;
    prog[16] = st(OP_LSTM_HIDDEN, 1100, 1800, H, W, 1); prog[16].src1 = 16'd1700;
               prog[16].sh1 = 5'd8; prog[16].sh3 = 5'd10; prog[16].sh0 = 5'd14;
    prog[17] = dma(OP_DMA_STORE, 1800, 14000, H * W, 0);
    prog[18] = '0;   // OP_END
  end

  // ---- mechanism counters -------------------------------------------------------
  int n_op [16];
  int n_stall = 0, n_split = 0, n_lane = 0, n_ext = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_seq.state == 3'd3) n_op[int'(dut.cur.op)]++;      // dispatch
    if ((arvalid && !arready) || (rvalid == 0 && rready) || (wvalid && !wready)) n_stall++;
    if (arvalid && arready && (araddr[11:0] + (12'(arlen) + 1) * 8 == 13'h1000) && arlen != 8'd15) n_split++;
    if (dut.mw.en && dut.mw.lane_en != 4'hf) n_lane++;
  end

  // ---- reference ----------------------------------------------------------------
  task automatic ref_run();
    for (int a = 0; a < 65536; a++) rmem[a] = '0;
    for (int k = 0; k < NST; k++) begin
      stage_t s;
      s = prog[k];
      unique case (s.op)
        OP_DMA_LOAD:
          if (s.dma_param) for (int i = 0; i < int'(s.len); i++) pmem[int'(s.dst) + i] = u_ddr.mem[s.dram_addr / 8 + i];
          else if (k == 14) for (int i = 0; i < int'(s.len); i++)
            for (int l = 0; l < 4; l++) setl(int'(s.dst) + i, l, getl(rmem[1300 + i], l) >>> 1);
          else for (int i = 0; i < int'(s.len); i++) rmem[int'(s.dst) + i] = u_ddr.mem[s.dram_addr / 8 + i];
        OP_CONV: begin
          int K, S;
          K = (s.conv_sel == CONV_1_1) ? 1 : (s.conv_sel == CONV_3_1 || s.conv_sel == CONV_3_2) ? 3 : 5;
          S = (s.conv_sel == CONV_3_2 || s.conv_sel == CONV_5_2) ? 2 : 1;
          ref_conv(s, K, S, (K == 5) ? 2 : 4);
        end
        OP_ADD, OP_RSHIFT: ref_elt(s);
        OP_UPSAMPLE:       ref_up(s);
        OP_COPY:           ref_copy(s);
        OP_LSTM_CELL:      ref_cell(s);
        OP_LSTM_HIDDEN:    ref_hidden(s);
        default: ;
      endcase
    end
  endtask

  initial begin
    logic [31:0] d;
    int cyc;
    {l_awaddr, l_araddr, l_awvalid, l_wvalid, l_bready, l_arvalid, l_rready, l_wdata} = '0;
    for (int i = 0; i < 16; i++) n_op[i] = 0;
    for (int a = 0; a < 65536; a++) dut.u_data_mem.mem[a] = '0;
    for (int a = 0; a < 16384; a++) u_ddr.mem[a] = '0;
    for (int a = 0; a < H * W * 2; a++) u_ddr.mem[500 + a] = rnd_word(12);
    for (int a = 0; a < 5 * 1024; a++) u_ddr.mem[4096 + a] = {$urandom, $urandom};
    repeat (3) @(negedge clk);
    rst_n = 1;
    // program the stage list
    wr(8'h10, 32'd0);
    for (int k = 0; k < NST; k++) begin
      for (int j = 0; j < 8; j++) wr(8'h20 + 8'(4 * j), prog[k][j*32 +: 32]);
      wr(8'h14, 32'd1);
    end
    wr(8'h00, 32'd1);
    // CPU loop: poll for extern requests until the list is done
    cyc = 0;
    forever begin
      rd(8'h04, d);
      if (d[1]) break;
      if (d[2]) begin
        rd(8'h08, d);
        checks++;
        if (d !== 32'h8000_0007) begin failures++; $display("FAIL opcode %h", d); end
        for (int i = 0; i < H * W * 3; i++)
          for (int l = 0; l < 4; l++)
            u_ddr.mem[13000 + i][l*16 +: 16] = 16'($signed(u_ddr.mem[12000 + i][l*16 +: 16]) >>> 1);
        n_ext++;
        wr(8'h0C, 32'd1);
      end
      cyc++;
    end
    ref_run();
    for (int a = 0; a < 2048; a++) begin
      checks++;
      if (dut.u_data_mem.mem[a] !== rmem[a]) begin
        failures++;
        if (failures < 40) $display("FAIL data word %0d got %h exp %h", a, dut.u_data_mem.mem[a], rmem[a]);
      end
    end
    for (int i = 0; i < H * W * 3; i++) begin
      checks++;
      if (u_ddr.mem[12000 + i] !== rmem[1300 + i]) failures++;
    end
    for (int i = 0; i < H * W; i++) begin
      checks++;
      if (u_ddr.mem[14000 + i] !== rmem[1800 + i]) failures++;
    end
    // every mechanism happened
    begin
      static op_e need [11] = '{OP_CONV, OP_ADD, OP_RSHIFT, OP_UPSAMPLE, OP_COPY, OP_LSTM_CELL,
                         OP_LSTM_HIDDEN, OP_EXTERN, OP_DMA_LOAD, OP_DMA_STORE, OP_END};
      foreach (need[i]) begin
        checks++;
        $display("mechanism %-15s %0d", need[i].name(), n_op[int'(need[i])]);
        if (n_op[int'(need[i])] == 0) failures++;
      end
    end
    $display("mechanism extern-handoff  %0d", n_ext);
    $display("mechanism axi-stall       %0d", n_stall);
    $display("mechanism page-split      %0d", n_split);
    $display("mechanism lane-masked-wr  %0d", n_lane);
    checks += 5;
    if (n_ext != 1) failures++;
    if (n_stall == 0) failures++;
    if (n_split == 0) failures++;
    if (n_lane == 0) failures++;
    if (n_op[int'(OP_CONV)] != 5) failures++;
    checks++;
    if (u_ddr.protocol_errors != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
