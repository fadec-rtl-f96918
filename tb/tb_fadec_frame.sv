// tb_fadec_frame: the accelerator on one 96x64 frame, the input size at which
// the network was evaluated.
//
// A front end in the style of the network's feature extractor runs through the
// complete top at its default sizes:
//   input 96x64, 4 channels (RGB padded to one channel group)
//   -> conv 3x3 stride 2, 32 channels, ReLU   (48x32)
//   -> conv 1x1, 16 channels                  (lateral branch)
//   -> conv 3x3, 16 channels, ReLU
//   -> conv 5x5 stride 2, 16 channels         (24x16)
//   -> nearest upsampling x2 -> skip-connection add with the lateral branch
//   -> store to DRAM
//   -> three-input concatenation of the lateral branch, the sum and the
//      upsampled tensor into one 48-channel tensor.
// Each layer's biases and weights are streamed into the parameter memory by a
// DMA stage just before the layer, as a full network run would do. The
// channel counts are representative of the network's first layers, not taken
// from a trained model, and the weights are random. The testbench checks
// every tensor in the data memory and the DRAM result against the golden
// model, and checks that each convolution stage takes exactly
// (pixels * chunks) * (OC_PAR/2 + K*K*Cin/2 + 2) cycles plus the same fixed
// stage overhead. It prints the cycle count of every stage and of the frame
// fragment.
module tb_fadec_frame;
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

  axi_mem_model #(.WORDS(24576), .STALL_MOD(3)) u_ddr (.clk, .rst_n, .araddr, .arlen, .arvalid,
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
  localparam int NST = 16;
  stage_t prog [NST];
  localparam int H = 64, W = 96, H2 = 32, W2 = 48, H4 = 16, W4 = 24;
  localparam int A_IN = 0, A_C1 = 8192, A_C2 = 20480, A_C3 = 26624, A_C4 = 32768,
                 A_UP = 34304, A_ADD = 40448, A_CAT = 46592, A_END = 65024;
  localparam int D_OUT = 16384;
  // parameter blocks in DRAM: {dram word, words, bias words}
  localparam int PD [4] = '{8192, 8448, 8704, 9216};
  localparam int PN [4] = '{160, 72, 296, 1608};
  localparam int PB [4] = '{16, 8, 8, 8};

  function automatic stage_t st(op_e op, int src0, int dst, int h, int w, int cin_g);
    stage_t s;
    s = '0;
    s.op = op; s.src0 = 16'(src0); s.dst = 16'(dst); s.h = 8'(h); s.w = 8'(w); s.cin_g = cg_t'(cin_g);
    return s;
  endfunction

  function automatic stage_t cv(conv_sel_e k, int src0, int dst, int h, int w, int cin_g,
                                int oc, act_e act, int sh0);
    stage_t s;
    s = st(OP_CONV, src0, dst, h, w, cin_g);
    s.conv_sel = k; s.paddr = '0; s.oc_num = cg_t'(oc); s.oc_first = '0;
    s.cout_g = cg_t'(oc); s.act = act; s.scale = 8'sd3; s.sh0 = 5'(sh0); s.sh1 = 5'd8;
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
    prog[0]  = dma(OP_DMA_LOAD, A_IN, 0, H * W, 0);
    prog[1]  = dma(OP_DMA_LOAD, 0, PD[0], PN[0], 1);
    prog[2]  = cv(CONV_3_2, A_IN, A_C1, H, W, 1, 8, ACT_RELU, 11);
    prog[3]  = dma(OP_DMA_LOAD, 0, PD[1], PN[1], 1);
    prog[4]  = cv(CONV_1_1, A_C1, A_C2, H2, W2, 8, 4, ACT_NONE, 11);
    prog[5]  = dma(OP_DMA_LOAD, 0, PD[2], PN[2], 1);
    prog[6]  = cv(CONV_3_1, A_C2, A_C3, H2, W2, 4, 4, ACT_RELU, 12);
    prog[7]  = dma(OP_DMA_LOAD, 0, PD[3], PN[3], 1);
    prog[8]  = cv(CONV_5_2, A_C3, A_C4, H2, W2, 4, 4, ACT_NONE, 13);
    prog[9]  = st(OP_UPSAMPLE, A_C4, A_UP, H4, W4, 4);
    prog[10] = st(OP_ADD, A_C2, A_ADD, H2, W2, 4); prog[10].src1 = 16'(A_UP);
               prog[10].lb = 5'd1; prog[10].sh0 = 5'd1;
    prog[11] = dma(OP_DMA_STORE, A_ADD, D_OUT, H2 * W2 * 4, 0);
    // three-input concatenation [lateral, sum, upsampled] -> 12 channel groups
    prog[12] = st(OP_COPY, A_C2, A_CAT, H2, W2, 4);
    prog[13] = st(OP_COPY, A_ADD, A_CAT, H2, W2, 4);
    prog[14] = st(OP_COPY, A_UP, A_CAT, H2, W2, 4);
    for (int k = 12; k < 15; k++) begin
      prog[k].oc_num = 10'd4; prog[k].cout_g = 10'd12; prog[k].oc_first = cg_t'(4 * (k - 12));
    end
    prog[15] = '0;   // OP_END
  end

  // ---- stage timing: cycle of each dispatch -----------------------------------
  longint cycle = 0, t_disp [NST + 1];
  int     n_disp = 0;
  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (rst_n && dut.u_seq.state == 3'd3 && n_disp <= NST) begin
      t_disp[n_disp] = cycle;
      n_disp++;
    end
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
        default: ;
      endcase
    end
  endtask

  // cycles a conv stage's unit needs, from the unit's documented rate
  function automatic longint conv_cycles(stage_t s);
    int K, S, OCP, ho, wo, chunks, per;
    K = (s.conv_sel == CONV_1_1) ? 1 : (s.conv_sel == CONV_3_1 || s.conv_sel == CONV_3_2) ? 3 : 5;
    S = (s.conv_sel == CONV_3_2 || s.conv_sel == CONV_5_2) ? 2 : 1;
    OCP = (K == 5) ? 2 : 4;
    ho = (int'(s.h) - 1) / S + 1;
    wo = (int'(s.w) - 1) / S + 1;
    chunks = ho * wo * int'(s.oc_num) * (4 / OCP);
    per    = OCP / 2 + K * K * int'(s.cin_g) * 2 + 2;
    return longint'(chunks) * longint'(per) + 2;
  endfunction

  initial begin
    logic [31:0] d;
    longint ovh [$];
    {l_awaddr, l_araddr, l_awvalid, l_wvalid, l_bready, l_arvalid, l_rready, l_wdata} = '0;
    for (int a = 0; a < 65536; a++) dut.u_data_mem.mem[a] = '0;
    for (int a = 0; a < 24576; a++) u_ddr.mem[a] = '0;
    for (int a = 0; a < H * W; a++) u_ddr.mem[a] = rnd_word(12);
    for (int p = 0; p < 4; p++)
      for (int j = 0; j < PN[p]; j++)
        if (j < PB[p]) u_ddr.mem[PD[p] + j] = {32'($signed(16'($urandom))), 32'($signed(16'($urandom)))};
        else           u_ddr.mem[PD[p] + j] = {$urandom, $urandom};
    repeat (3) @(negedge clk);
    rst_n = 1;
    wr(8'h10, 32'd0);
    for (int k = 0; k < NST; k++) begin
      for (int j = 0; j < 8; j++) wr(8'h20 + 8'(4 * j), prog[k][j*32 +: 32]);
      wr(8'h14, 32'd1);
    end
    wr(8'h00, 32'd1);
    forever begin
      rd(8'h04, d);
      if (d[1]) break;
      repeat (50) @(negedge clk);
    end
    t_disp[NST] = cycle;
    ref_run();
    for (int a = 0; a < A_END; a++) begin
      checks++;
      if (dut.u_data_mem.mem[a] !== rmem[a]) begin
        failures++;
        if (failures < 20) $display("FAIL data word %0d got %h exp %h", a, dut.u_data_mem.mem[a], rmem[a]);
      end
    end
    for (int i = 0; i < H2 * W2 * 4; i++) begin
      checks++;
      if (u_ddr.mem[D_OUT + i] !== rmem[A_ADD + i]) failures++;
    end
    // timing: every conv stage = documented unit cycles + one common overhead
    for (int k = 0; k < NST; k++) begin
      longint dur;
      dur = t_disp[k + 1] - t_disp[k];
      if (prog[k].op == OP_CONV) begin
        ovh.push_back(dur - conv_cycles(prog[k]));
        $display("stage %2d %-12s %8d cycles (unit %0d)", k, prog[k].op.name(), dur, conv_cycles(prog[k]));
      end else
        $display("stage %2d %-12s %8d cycles", k, prog[k].op.name(), dur);
    end
    foreach (ovh[i]) begin
      checks++;
      if (ovh[i] != ovh[0] || ovh[i] < 0 || ovh[i] > 8) begin
        failures++;
        $display("FAIL conv stage overhead %0d (first %0d)", ovh[i], ovh[0]);
      end
    end
    $display("frame fragment: %0d cycles (%0d us at 187.5 MHz)", t_disp[NST] - t_disp[0],
             (t_disp[NST] - t_disp[0]) * 16 / 3000);
    checks++;
    if (u_ddr.protocol_errors != 0) failures++;
    // the DRAM result must not be all zero or all saturated
    begin
      int nz, sat;
      nz = 0; sat = 0;
      for (int i = 0; i < H2 * W2 * 4; i++)
        for (int l = 0; l < 4; l++) begin
          longint v;
          v = getl(u_ddr.mem[D_OUT + i], l);
          if (v != 0) nz++;
          if (v == 32767 || v == -32768) sat++;
        end
      $display("result lanes: %0d nonzero, %0d saturated of %0d", nz, sat, H2 * W2 * 16);
      checks++;
      if (nz < H2 * W2 * 8 || sat > H2 * W2 * 4) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (4000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
