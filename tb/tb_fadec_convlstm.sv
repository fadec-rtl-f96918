// tb_fadec_convlstm: the ConvLSTM (CL) step of the network at its real
// size for a 96x64 frame, through the complete top at its default sizes.
//
// At 1/32 of the input resolution the cell works on a 3x2 grid with a
// 512-channel input x and a 512-channel hidden state h. The stage list
//   * loads x and h from DRAM and concatenates them (1024 channels);
//   * runs the 3x3 gate convolution 1024 -> 2048 channels as 171 output
//     slices of at most 12 channels, each preceded by a DMA load of its
//     biases and weights (13,830 words) into the parameter memory;
//   * slices the gate tensor into the i, f, g and o gates (four copy stages);
//   * loads the old cell state c and runs the cell-state and hidden-state
//     pipelines, and stores c' and h' back to DRAM.
// About 360 stages and 2.36 M parameter words are streamed. The layer
// normalisation that the network applies to the gates runs on the CPU and is
// left out here (identity). Channel counts are the network's; weights and
// inputs are random. Every tensor and both DRAM results are compared with
// the golden model, and every conv slice must take exactly the unit's cycle
// formula plus the common stage overhead.
module tb_fadec_convlstm;
  import fadec_pkg::*;
  localparam int DDR_WORDS = 2400000;
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

  axi_mem_model #(.WORDS(DDR_WORDS), .STALL_MOD(3)) u_ddr (.clk, .rst_n, .araddr, .arlen, .arvalid,
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
  localparam int H = 2, W = 3, XG = 128, CG = 256, GG = 512, SL = 3;
  localparam int NPX = H * W, N = NPX * XG;            // words per 512-channel tensor
  localparam int A_CAT = 0, A_X = 2048, A_H = 3072, A_GT = 4096, A_I = 8192,
                 A_O = A_I + 3 * N, A_C = A_O + N, A_C2 = A_C + N, A_H2 = A_C2 + N,
                 A_END = A_H2 + N;
  localparam int D_X = 0, D_H = 1024, D_C = 2048, D_C2 = 3072, D_H2 = 4096, D_P = 8192;
  localparam int PW = SL * 2 + SL * 9 * CG * 2;         // words of a full slice
  localparam int NSL = (GG + SL - 1) / SL;
  localparam int NMAX = 400;
  stage_t prog [NMAX];
  int     nst = 0;

  function automatic stage_t st(op_e op, int src0, int dst, int h, int w, int cin_g);
    stage_t s;
    s = '0;
    s.op = op; s.src0 = 16'(src0); s.dst = 16'(dst); s.h = 8'(h); s.w = 8'(w); s.cin_g = cg_t'(cin_g);
    return s;
  endfunction

  function automatic stage_t dma(op_e op, int bram, int dram_word, int len, bit to_param);
    stage_t s;
    s = '0;
    s.op = op; s.dst = 16'(bram); s.src0 = 16'(bram);
    s.dram_addr = 32'(dram_word * 8); s.len = 20'(len); s.dma_param = to_param;
    return s;
  endfunction

  function automatic void push(stage_t s);
    prog[nst] = s;
    nst++;
  endfunction

  function automatic stage_t cp(int src0, int dst, int cin_g, int soff, int cout_g, int first, int num);
    stage_t s;
    s = st(OP_COPY, src0, dst, H, W, cin_g);
    s.soff = cg_t'(soff); s.cout_g = cg_t'(cout_g); s.oc_first = cg_t'(first); s.oc_num = cg_t'(num);
    return s;
  endfunction

  task automatic build();
    stage_t s;
    push(dma(OP_DMA_LOAD, A_X, D_X, N, 0));
    push(dma(OP_DMA_LOAD, A_H, D_H, N, 0));
    push(cp(A_X, A_CAT, XG, 0, CG, 0, XG));               // concat(x, h)
    push(cp(A_H, A_CAT, XG, 0, CG, XG, XG));
    for (int k = 0; k < NSL; k++) begin
      int num;
      num = (GG - k * SL < SL) ? GG - k * SL : SL;
      push(dma(OP_DMA_LOAD, 0, D_P + k * PW, num * 2 + num * 9 * CG * 2, 1));
      s = st(OP_CONV, A_CAT, A_GT, H, W, CG);
      s.conv_sel = CONV_3_1; s.act = ACT_NONE; s.paddr = '0; s.oc_first = cg_t'(k * SL);
      s.oc_num = cg_t'(num); s.cout_g = cg_t'(GG); s.scale = 8'sd3; s.sh0 = 5'd14;
      push(s);
    end
    for (int q = 0; q < 4; q++)                           // slice gates i, f, g, o
      push(cp(A_GT, A_I + q * N, GG, q * XG, XG, 0, XG));
    push(dma(OP_DMA_LOAD, A_C, D_C, N, 0));
    s = st(OP_LSTM_CELL, A_I, A_C2, H, W, XG); s.src1 = 16'(A_C);
    s.sh1 = 5'd8; s.sh2 = 5'd3; s.sh3 = 5'd10; s.sh0 = 5'd11;
    push(s);
    s = st(OP_LSTM_HIDDEN, A_O, A_H2, H, W, XG); s.src1 = 16'(A_C2);
    s.sh1 = 5'd8; s.sh3 = 5'd10; s.sh0 = 5'd14;
    push(s);
    push(dma(OP_DMA_STORE, A_C2, D_C2, N, 0));
    push(dma(OP_DMA_STORE, A_H2, D_H2, N, 0));
    push('0);                                             // OP_END
  endtask

  // ---- stage timing: cycle of each dispatch -----------------------------------
  longint cycle = 0, t_disp [NMAX + 1];
  int     n_disp = 0;
  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (rst_n && dut.u_seq.state == 3'd3 && n_disp < NMAX) begin
      t_disp[n_disp] = cycle;
      n_disp++;
    end
  end

  // ---- reference ----------------------------------------------------------------
  task automatic ref_run();
    for (int a = 0; a < 65536; a++) rmem[a] = '0;
    for (int k = 0; k < nst; k++) begin
      stage_t s;
      s = prog[k];
      unique case (s.op)
        OP_DMA_LOAD:
          if (s.dma_param) for (int i = 0; i < int'(s.len); i++) pmem[int'(s.dst) + i] = u_ddr.mem[s.dram_addr / 8 + i];
          else for (int i = 0; i < int'(s.len); i++) rmem[int'(s.dst) + i] = u_ddr.mem[s.dram_addr / 8 + i];
        OP_CONV:           ref_conv(s, 3, 1, 4);
        OP_COPY:           ref_copy(s);
        OP_LSTM_CELL:      ref_cell(s);
        OP_LSTM_HIDDEN:    ref_hidden(s);
        default: ;
      endcase
    end
  endtask

  initial begin
    logic [31:0] d;
    longint ovh, conv_total;
    int bad_t;
    {l_awaddr, l_araddr, l_awvalid, l_wvalid, l_bready, l_arvalid, l_rready, l_wdata} = '0;
    build();
    $display("stage list: %0d stages, %0d parameter slices", nst, NSL);
    for (int a = 0; a < 65536; a++) dut.u_data_mem.mem[a] = '0;
    for (int a = 0; a < D_P; a++) u_ddr.mem[a] = (a < D_C2) ? rnd_word(12) : '0;
    for (int k = 0; k < NSL; k++) begin
      int num;
      num = (GG - k * SL < SL) ? GG - k * SL : SL;
      for (int j = 0; j < num * 2 + num * 9 * CG * 2; j++)
        if (j < num * 2) u_ddr.mem[D_P + k * PW + j] = {32'($signed(16'($urandom))), 32'($signed(16'($urandom)))};
        else             u_ddr.mem[D_P + k * PW + j] = {$urandom, $urandom};
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    wr(8'h10, 32'd0);
    for (int k = 0; k < nst; k++) begin
      for (int j = 0; j < 8; j++) wr(8'h20 + 8'(4 * j), prog[k][j*32 +: 32]);
      wr(8'h14, 32'd1);
    end
    wr(8'h00, 32'd1);
    forever begin
      rd(8'h04, d);
      if (d[1]) break;
      repeat (1000) @(negedge clk);
    end
    t_disp[nst] = cycle;
    checks++;
    if (n_disp != nst) begin failures++; $display("FAIL %0d dispatches for %0d stages", n_disp, nst); end
    ref_run();
    for (int a = 0; a < A_END; a++) begin
      checks++;
      if (dut.u_data_mem.mem[a] !== rmem[a]) begin
        failures++;
        if (failures < 20) $display("FAIL data word %0d got %h exp %h", a, dut.u_data_mem.mem[a], rmem[a]);
      end
    end
    for (int i = 0; i < N; i++) begin
      checks += 2;
      if (u_ddr.mem[D_C2 + i] !== rmem[A_C2 + i]) failures++;
      if (u_ddr.mem[D_H2 + i] !== rmem[A_H2 + i]) failures++;
    end
    // timing of every conv slice
    ovh = -1; bad_t = 0; conv_total = 0;
    for (int k = 0; k < nst; k++)
      if (prog[k].op == OP_CONV) begin
        longint dur, unit;
        dur  = t_disp[k + 1] - t_disp[k];
        unit = longint'(NPX * int'(prog[k].oc_num)) * (2 + 9 * CG * 2 + 2) + 2;
        conv_total += dur;
        if (ovh < 0) ovh = dur - unit;
        checks++;
        if (dur - unit != ovh || ovh > 8) bad_t++;
      end
    failures += bad_t;
    $display("gate convolution: %0d cycles in %0d slices, stage overhead %0d cycles, %0d mismatches",
             conv_total, NSL, ovh, bad_t);
    $display("ConvLSTM step: %0d cycles (%0d us at 187.5 MHz)", t_disp[nst] - t_disp[0],
             (t_disp[nst] - t_disp[0]) * 16 / 3000);
    checks++;
    if (u_ddr.protocol_errors != 0) failures++;
    begin
      int nz, sat;
      nz = 0; sat = 0;
      for (int i = 0; i < N; i++)
        for (int l = 0; l < 4; l++) begin
          longint v;
          v = getl(u_ddr.mem[D_H2 + i], l);
          if (v != 0) nz++;
          if (v == 32767 || v == -32768) sat++;
        end
      $display("h' lanes: %0d nonzero, %0d saturated of %0d", nz, sat, N * 4);
      checks++;
      if (nz < N * 2 || sat > N) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
