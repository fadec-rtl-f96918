// conv_unit: quantised convolution pipeline for one (kernel size, stride).
//
// The accelerator holds one such unit per (kernel, stride) pair that the
// network uses: (1,1), (3,1), (3,2), (5,1) and (5,2). Each unit computes, for
// every output pixel and output channel,
//     m1 = sum(W * x) + b,   m2 = m1 * s,   y = act(clip(rshift(m2, r)))
// with 8-bit weights, 32-bit per-channel biases, an 8-bit per-tensor scale s,
// 16-bit activations and act = none, ReLU or sigmoid. This is the paper's
// post-training-quantised convolution, with its activation folded in.
//
// Parallelism: every cycle IC_PAR input channels times OC_PAR output channels
// are multiplied and accumulated (the paper uses IC_PAR = 2 and OC_PAR = 4, or
// 2 for 5x5 kernels). Output channels are processed in chunks of OC_PAR; for
// one output pixel and chunk the unit reads its OC_PAR/2 bias words, then
// streams K*K*Cin/IC_PAR (data word, weight word) pairs, one pair per cycle,
// drains for one cycle and writes the chunk's lanes of the output word. A chunk
// therefore takes OC_PAR/2 + K*K*Cin/IC_PAR + 2 cycles; `done` pulses one
// cycle after the last write is issued.
//
// Memory layout (this design's choice; the paper leaves it to the HLS tool):
//  * activations: HWC, 4 channels per 64-bit word, word address
//    base + (y*W + x)*groups + group;
//  * biases: two 32-bit biases per word starting at cfg.paddr, one per output
//    channel of the stage (oc_num*4 channels);
//  * weights: following the biases, one 64-bit word per (chunk, ky, kx,
//    input-channel pair) with weight W[o][i] in byte o*IC_PAR + i.
// Zero "same" padding of (K-1)/2 pixels is applied at the borders.
// Descriptor fields used: h, w, cin_g, cout_g, oc_first, oc_num, src0, dst,
// paddr, scale, sh0 (r), sh1 (sigmoid input shift), act.
module conv_unit
  import fadec_pkg::*;
#(
  parameter int unsigned K      = 3,
  parameter int unsigned S      = 1,
  parameter int unsigned IC_PAR = 2,
  parameter int unsigned OC_PAR = (K == 5) ? 2 : 4
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  input  stage_t cfg,
  output logic   busy,
  output logic   done,
  output drd_t   dr,
  input  word_t  dr_q,
  output logic   pr_en,
  output paddr_t pr_addr,
  input  word_t  pr_q,
  output dwr_t   dw
);
  localparam int unsigned P    = (K - 1) / 2;
  localparam int unsigned KK   = K * K;
  localparam int unsigned NBW  = OC_PAR / 2;       // bias words per chunk
  localparam int unsigned IPW  = LANES / IC_PAR;   // input-channel pairs per word
  localparam int unsigned CPW  = LANES / OC_PAR;   // chunks per output word
  localparam int unsigned ACC_W = 40;

  typedef enum logic [2:0] {S_IDLE, S_BIAS, S_MAC, S_DRAIN, S_OUT, S_FIN} state_e;
  typedef enum logic [1:0] {T_NONE, T_BIAS, T_MAC} tag_e;

  state_e state;
  stage_t c;
  logic [7:0]  ho, wo;
  logic [11:0] icp, nch;
  logic [7:0]  oy, ox;
  logic [11:0] ch, p;
  logic [2:0]  ky, kx;
  logic [1:0]  bcnt;
  paddr_t      wbase;

  // stage-2 tag
  tag_e        t2;
  logic        pad2;
  logic [1:0]  lsel2, bidx2;

  logic signed [ACC_W-1:0] acc [OC_PAR];

  // ---- address generation -------------------------------------------------
  logic signed [10:0] iy, ix;
  logic               inb;
  logic               last_k;
  always_comb begin
    iy  = 11'($signed({3'b0, oy}) * 11'(S)) + 11'(ky) - 11'(P);
    ix  = 11'($signed({3'b0, ox}) * 11'(S)) + 11'(kx) - 11'(P);
    inb = (iy >= 0) && (iy < $signed({3'b0, c.h})) && (ix >= 0) && (ix < $signed({3'b0, c.w}));
    last_k = (p == icp - 1) && (32'(kx) == K - 1) && (32'(ky) == K - 1);
  end

  always_comb begin
    dr      = '0;
    pr_en   = 1'b0;
    pr_addr = '0;
    if (state == S_BIAS) begin
      pr_en   = 1'b1;
      pr_addr = paddr_t'(c.paddr + ch * 12'(NBW) + 16'(bcnt));
    end else if (state == S_MAC) begin
      dr.en   = inb;
      dr.addr = daddr_t'(c.src0 + (16'(iy) * 16'(c.w) + 16'(ix)) * 16'(c.cin_g) + 16'(p / 12'(IPW)));
      pr_en   = 1'b1;
      pr_addr = paddr_t'(wbase + ((ch * 16'(KK)) + 16'(ky) * 16'(K) + 16'(kx)) * 16'(icp) + 16'(p));
    end
  end

  // ---- control --------------------------------------------------------------
  logic last_chunk, last_px;
  assign last_chunk = (ch == nch - 1);
  assign last_px    = (ox == wo - 1) && (oy == ho - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      done  <= 1'b0;
      t2    <= T_NONE;
      c     <= '0;
      {ho, wo, icp, nch, oy, ox, ch, p, ky, kx, bcnt, wbase} <= '0;
      {pad2, lsel2, bidx2} <= '0;
    end else begin
      done <= 1'b0;
      t2   <= T_NONE;
      unique case (state)
        S_IDLE: if (start) begin
          c     <= cfg;
          ho    <= 8'(((32'(cfg.h) + 2 * P - K) / S) + 1);
          wo    <= 8'(((32'(cfg.w) + 2 * P - K) / S) + 1);
          icp   <= 12'(cfg.cin_g) * 12'(IPW);
          nch   <= 12'(cfg.oc_num) * 12'(CPW);
          wbase <= cfg.paddr + 16'(cfg.oc_num) * 16'd2;
          {oy, ox, ch, p, ky, kx, bcnt} <= '0;
          state <= S_BIAS;
        end
        S_BIAS: begin
          t2    <= T_BIAS;
          bidx2 <= bcnt;
          if (32'(bcnt) == NBW - 1) begin
            bcnt  <= '0;
            state <= S_MAC;
          end else bcnt <= bcnt + 2'd1;
        end
        S_MAC: begin
          t2    <= T_MAC;
          pad2  <= !inb;
          lsel2 <= 2'(p % 12'(IPW));
          if (last_k) begin
            {p, kx, ky} <= '0;
            state <= S_DRAIN;
          end else if (p != icp - 1) p <= p + 12'd1;
          else begin
            p <= '0;
            if (32'(kx) != K - 1) kx <= kx + 3'd1;
            else begin
              kx <= '0;
              ky <= ky + 3'd1;
            end
          end
        end
        S_DRAIN: state <= S_OUT;
        S_OUT: begin
          if (last_chunk) begin
            ch <= '0;
            if (ox != wo - 1) ox <= ox + 8'd1;
            else begin
              ox <= '0;
              oy <= oy + 8'd1;
            end
          end else ch <= ch + 12'd1;
          state <= (last_chunk && last_px) ? S_FIN : S_BIAS;
        end
        S_FIN: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  // ---- multiply-accumulate (one cycle after issue) ------------------------
  always_ff @(posedge clk) begin
    if (t2 == T_BIAS) begin
      acc[2*bidx2]   <= ACC_W'($signed(pr_q[31:0]));
      acc[2*bidx2+1] <= ACC_W'($signed(pr_q[63:32]));
    end else if (t2 == T_MAC) begin
      for (int o = 0; o < OC_PAR; o++) begin
        logic signed [ACC_W-1:0] sum;
        sum = acc[o];
        for (int i = 0; i < IC_PAR; i++) begin
          logic signed [7:0]  wv;
          logic signed [15:0] xv;
          wv  = $signed(pr_q[(o*IC_PAR+i)*8 +: 8]);
          xv  = pad2 ? 16'sd0 : $signed(dr_q[(32'(lsel2)*IC_PAR+i)*16 +: 16]);
          sum = sum + ACC_W'(wv) * ACC_W'(xv);
        end
        acc[o] <= sum;
      end
    end
  end

  // ---- requantise, activate, write ------------------------------------------
  logic signed [15:0] yq [OC_PAR];
  logic signed [15:0] ys [OC_PAR];
  for (genvar o = 0; o < OC_PAR; o++) begin : g_out
    logic signed [47:0] m2;
    assign m2 = 48'(acc[o]) * 48'(c.scale);
    rshift_clip #(.IN_W(48), .OUT_W(16)) u_rq (.din(m2), .r({1'b0, c.sh0}), .dout(yq[o]));
    sigmoid_lut u_sig (.x(yq[o]), .in_shift(c.sh1), .y(ys[o]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) dw <= '0;
    else begin
      dw.en <= (state == S_OUT);
      if (state == S_OUT) begin
        logic [1:0] l0;
        l0 = 2'((32'(ch) % CPW) * OC_PAR);
        dw.addr    <= daddr_t'(c.dst + (16'(oy) * 16'(wo) + 16'(ox)) * 16'(c.cout_g)
                               + 16'(c.oc_first) + 16'(ch / 12'(CPW)));
        dw.lane_en <= '0;
        dw.data    <= '0;
        for (int o = 0; o < OC_PAR; o++) begin
          logic signed [15:0] a;
          unique case (c.act)
            ACT_RELU:    a = (yq[o] < 0) ? 16'sd0 : yq[o];
            ACT_SIGMOID: a = ys[o];
            default:     a = yq[o];
          endcase
          dw.lane_en[32'(l0) + o]           <= 1'b1;
          dw.data[(32'(l0) + o)*16 +: 16]   <= a;
        end
      end
    end
  end
endmodule
