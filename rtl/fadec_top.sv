// fadec_top: programmable-logic part of the FADEC depth-estimation
// accelerator.
//
// Two banks of on-chip memory sit on either side of a set of dedicated
// arithmetic pipelines: the data memory (activations) and the parameter
// memory (weights and biases). A DMA controller fills and drains them over an
// AXI4 master port that leads to DRAM shared with the CPU. The pipelines are
//   * five convolution units, one per (kernel, stride) = (1,1), (3,1), (3,2),
//     (5,1), (5,2), each with requantisation and ReLU / sigmoid;
//   * an element-wise unit (skip-connection add with lshift/rshift/clip, and
//     the lone rshift used before concatenation);
//   * nearest-neighbour upsampling;
//   * a channel-group copy unit for concatenation and slicing;
//   * the ConvLSTM cell-state and hidden-state pipelines.
// A stage sequencer runs a list of stage descriptors; one stage is active at
// a time and the memories' ports are switched to the unit it selects. Extern
// stages hand a process (grid sampling, layer normalisation, bilinear
// upsampling, ...) to the CPU through the registers of extern_regs, which the
// CPU reaches over an AXI4-Lite slave port; `irq` is high while a CPU process
// is pending.
// The block structure follows the paper's accelerator diagram. Memory sizes,
// the descriptor list and the register map are this design's choices.
// The AXI size, burst type, write strobes and the AXI4-Lite response codes are
// constant outputs: every transfer is a full 64-bit INCR burst and every
// register access is answered OKAY.
module fadec_top
  import fadec_pkg::*;
#(
  parameter int unsigned DATA_DEPTH  = 65536,
  parameter int unsigned PARAM_DEPTH = 16384,
  parameter int unsigned N_DESC      = 512
) (
  input  logic        clk,
  input  logic        rst_n,
  // AXI4 master to DRAM
  output logic [31:0] m_axi_araddr,
  output logic [7:0]  m_axi_arlen,
  output logic [2:0]  m_axi_arsize,
  output logic [1:0]  m_axi_arburst,
  output logic        m_axi_arvalid,
  input  logic        m_axi_arready,
  input  logic [63:0] m_axi_rdata,
  input  logic [1:0]  m_axi_rresp,
  input  logic        m_axi_rlast,
  input  logic        m_axi_rvalid,
  output logic        m_axi_rready,
  output logic [31:0] m_axi_awaddr,
  output logic [7:0]  m_axi_awlen,
  output logic [2:0]  m_axi_awsize,
  output logic [1:0]  m_axi_awburst,
  output logic        m_axi_awvalid,
  input  logic        m_axi_awready,
  output logic [63:0] m_axi_wdata,
  output logic [7:0]  m_axi_wstrb,
  output logic        m_axi_wlast,
  output logic        m_axi_wvalid,
  input  logic        m_axi_wready,
  input  logic [1:0]  m_axi_bresp,
  input  logic        m_axi_bvalid,
  output logic        m_axi_bready,
  // AXI4-Lite slave from the CPU
  input  logic [7:0]  s_axil_awaddr,
  input  logic        s_axil_awvalid,
  output logic        s_axil_awready,
  input  logic [31:0] s_axil_wdata,
  input  logic        s_axil_wvalid,
  output logic        s_axil_wready,
  output logic [1:0]  s_axil_bresp,
  output logic        s_axil_bvalid,
  input  logic        s_axil_bready,
  input  logic [7:0]  s_axil_araddr,
  input  logic        s_axil_arvalid,
  output logic        s_axil_arready,
  output logic [31:0] s_axil_rdata,
  output logic [1:0]  s_axil_rresp,
  output logic        s_axil_rvalid,
  input  logic        s_axil_rready,
  output logic        irq
);
  localparam int unsigned DAW = $clog2(DATA_DEPTH);
  localparam int unsigned PAW = $clog2(PARAM_DEPTH);
  localparam int unsigned IW  = $clog2(N_DESC);
  localparam int unsigned NCONV = 5;
  localparam int unsigned CK [NCONV] = '{1, 3, 3, 5, 5};
  localparam int unsigned CS [NCONV] = '{1, 1, 2, 1, 2};

  // ---- control ----------------------------------------------------------------
  stage_t cur;
  logic start, seq_busy, fin, ext_req, ext_ack, end_flag;
  logic [7:0] ext_op;
  logic desc_we;
  logic [IW-1:0] desc_waddr, pc;
  logic [DESC_W-1:0] desc_wdata;
  logic go_conv, go_elt, go_up, go_copy, go_cell, go_hidden, go_dma, unit_done;

  extern_regs #(.N_DESC(N_DESC)) u_regs (
    .clk, .rst_n,
    .s_axil_awaddr, .s_axil_awvalid, .s_axil_awready, .s_axil_wdata, .s_axil_wvalid,
    .s_axil_wready, .s_axil_bresp, .s_axil_bvalid, .s_axil_bready, .s_axil_araddr,
    .s_axil_arvalid, .s_axil_arready, .s_axil_rdata, .s_axil_rresp, .s_axil_rvalid,
    .s_axil_rready,
    .start, .busy(seq_busy), .fin, .ext_req, .ext_op, .ext_ack, .end_flag, .irq,
    .desc_we, .desc_waddr, .desc_wdata);

  stage_sequencer #(.N_DESC(N_DESC)) u_seq (
    .clk, .rst_n, .start, .busy(seq_busy), .fin,
    .desc_we, .desc_waddr, .desc_wdata(stage_t'(desc_wdata)),
    .cur, .go_conv, .go_elt, .go_up, .go_copy, .go_cell, .go_hidden, .go_dma, .unit_done,
    .ext_req, .ext_op, .end_flag, .ext_ack, .pc);

  // ---- memories -----------------------------------------------------------------
  drd_t  mra, mrb;
  dwr_t  mw;
  word_t mra_q, mrb_q;
  logic   p_ren, p_wen;
  paddr_t p_raddr, p_waddr;
  word_t  p_rdata, p_wdata, p_unused;

  bram_2r1w #(.DEPTH(DATA_DEPTH), .WIDTH(WORD_W), .LANE_W(A_BITS)) u_data_mem (
    .clk,
    .ra_en(mra.en), .ra_addr(DAW'(mra.addr)), .ra_data(mra_q),
    .rb_en(mrb.en), .rb_addr(DAW'(mrb.addr)), .rb_data(mrb_q),
    .w_en(mw.en), .w_lane(mw.lane_en), .w_addr(DAW'(mw.addr)), .w_data(mw.data));

  bram_2r1w #(.DEPTH(PARAM_DEPTH), .WIDTH(WORD_W), .LANE_W(A_BITS)) u_param_mem (
    .clk,
    .ra_en(p_ren), .ra_addr(PAW'(p_raddr)), .ra_data(p_rdata),
    .rb_en(1'b0), .rb_addr('0), .rb_data(p_unused),
    .w_en(p_wen), .w_lane('1), .w_addr(PAW'(p_waddr)), .w_data(p_wdata));

  // ---- convolution units ----------------------------------------------------------
  drd_t   cv_dr    [NCONV];
  dwr_t   cv_dw    [NCONV];
  logic   cv_pr_en [NCONV];
  paddr_t cv_pr_a  [NCONV];
  logic   cv_done  [NCONV];
  logic   cv_busy  [NCONV];

  for (genvar u = 0; u < NCONV; u++) begin : g_conv
    conv_unit #(.K(CK[u]), .S(CS[u]), .IC_PAR(2), .OC_PAR(CK[u] == 5 ? 2 : 4)) u_conv (
      .clk, .rst_n,
      .start(go_conv && (32'(cur.conv_sel) == u)), .cfg(cur),
      .busy(cv_busy[u]), .done(cv_done[u]),
      .dr(cv_dr[u]), .dr_q(mra_q), .pr_en(cv_pr_en[u]), .pr_addr(cv_pr_a[u]), .pr_q(p_rdata),
      .dw(cv_dw[u]));
  end

  // ---- other pipelines -----------------------------------------------------------
  drd_t el_dra, el_drb, up_dr, cp_dr, ce_dra, ce_drb, hi_dra, hi_drb, dma_dr;
  dwr_t el_dw, up_dw, cp_dw, ce_dw, hi_dw, dma_dw;
  logic el_done, up_done, cp_done, ce_done, hi_done, dma_done;
  logic el_busy, up_busy, cp_busy, ce_busy, hi_busy, dma_busy;
  logic dma_pw_en;
  paddr_t dma_pw_addr;
  word_t  dma_pw_data;

  eltwise_unit u_elt (.clk, .rst_n, .start(go_elt), .cfg(cur), .busy(el_busy), .done(el_done),
    .dra(el_dra), .drb(el_drb), .dra_q(mra_q), .drb_q(mrb_q), .dw(el_dw));
  upsample_unit u_up (.clk, .rst_n, .start(go_up), .cfg(cur), .busy(up_busy), .done(up_done),
    .dr(up_dr), .dr_q(mra_q), .dw(up_dw));
  copy_unit u_copy (.clk, .rst_n, .start(go_copy), .cfg(cur), .busy(cp_busy), .done(cp_done),
    .dr(cp_dr), .dr_q(mra_q), .dw(cp_dw));
  lstm_cell_unit u_cell (.clk, .rst_n, .start(go_cell), .cfg(cur), .busy(ce_busy), .done(ce_done),
    .dra(ce_dra), .drb(ce_drb), .dra_q(mra_q), .drb_q(mrb_q), .dw(ce_dw));
  lstm_hidden_unit u_hidden (.clk, .rst_n, .start(go_hidden), .cfg(cur), .busy(hi_busy),
    .done(hi_done), .dra(hi_dra), .drb(hi_drb), .dra_q(mra_q), .drb_q(mrb_q), .dw(hi_dw));

  dma_controller u_dma (
    .clk, .rst_n,
    .start(go_dma), .store(cur.op == OP_DMA_STORE), .to_param(cur.dma_param),
    .bram_addr(cur.op == OP_DMA_STORE ? cur.src0 : cur.dst), .dram_addr(cur.dram_addr),
    .len(cur.len), .busy(dma_busy), .done(dma_done),
    .dw(dma_dw), .pw_en(dma_pw_en), .pw_addr(dma_pw_addr), .pw_data(dma_pw_data),
    .dr(dma_dr), .dr_q(mra_q),
    .m_axi_araddr, .m_axi_arlen, .m_axi_arsize, .m_axi_arburst, .m_axi_arvalid, .m_axi_arready,
    .m_axi_rdata, .m_axi_rresp, .m_axi_rlast, .m_axi_rvalid, .m_axi_rready,
    .m_axi_awaddr, .m_axi_awlen, .m_axi_awsize, .m_axi_awburst, .m_axi_awvalid, .m_axi_awready,
    .m_axi_wdata, .m_axi_wstrb, .m_axi_wlast, .m_axi_wvalid, .m_axi_wready,
    .m_axi_bresp, .m_axi_bvalid, .m_axi_bready);

  // ---- port switching by the current stage --------------------------------------
  always_comb begin
    mra = '0;
    mrb = '0;
    mw  = '0;
    p_ren   = 1'b0;
    p_raddr = '0;
    unique case (cur.op)
      OP_CONV: begin
        for (int u = 0; u < NCONV; u++)
          if (32'(cur.conv_sel) == u) begin
            mra     = cv_dr[u];
            mw      = cv_dw[u];
            p_ren   = cv_pr_en[u];
            p_raddr = cv_pr_a[u];
          end
      end
      OP_ADD, OP_RSHIFT: begin mra = el_dra; mrb = el_drb; mw = el_dw; end
      OP_UPSAMPLE:       begin mra = up_dr;  mw = up_dw; end
      OP_COPY:           begin mra = cp_dr;  mw = cp_dw; end
      OP_LSTM_CELL:      begin mra = ce_dra; mrb = ce_drb; mw = ce_dw; end
      OP_LSTM_HIDDEN:    begin mra = hi_dra; mrb = hi_drb; mw = hi_dw; end
      OP_DMA_LOAD, OP_DMA_STORE: begin mra = dma_dr; mw = dma_dw; end
      default: ;
    endcase
  end

  assign p_wen   = dma_pw_en;
  assign p_waddr = dma_pw_addr;
  assign p_wdata = dma_pw_data;

  always_comb begin
    unit_done = el_done | up_done | cp_done | ce_done | hi_done | dma_done;
    for (int u = 0; u < NCONV; u++) unit_done = unit_done | cv_done[u];
  end

  // At most one pipeline is busy at any time.
  a_one_busy: assert property (@(posedge clk) disable iff (!rst_n)
      $countones({el_busy, up_busy, cp_busy, ce_busy, hi_busy, dma_busy,
                  cv_busy[0], cv_busy[1], cv_busy[2], cv_busy[3], cv_busy[4]}) <= 1);
endmodule
