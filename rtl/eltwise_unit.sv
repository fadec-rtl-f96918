// eltwise_unit: folded element-wise pipeline for skip connections and range
// alignment.
//
// For every 4-lane word of a tensor of h*w*cin_g words it computes, per lane,
//   OP_ADD:    y = clip(rshift((a << la) + (b << lb), r))
//   OP_RSHIFT: y = clip(rshift(a, r))
// The paper's accelerator chains add, rshift and clip (optionally with an
// lshift on either operand, to bring two power-of-two-scaled tensors to the
// same range) into one pipeline, and uses a lone rshift before
// concatenations; both are covered here by one unit with two lshift amounts.
// One word is issued per cycle on the two data-memory read ports and written
// two cycles later; `done` pulses together with the last write.
// Descriptor fields: op, h, w, cin_g, src0, src1, dst, la, lb, sh0 (r).
module eltwise_unit
  import fadec_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  input  stage_t cfg,
  output logic   busy,
  output logic   done,
  output drd_t   dra,
  output drd_t   drb,
  input  word_t  dra_q,
  input  word_t  drb_q,
  output dwr_t   dw
);
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_LAST} state_e;
  state_e state;
  stage_t c;
  logic [23:0] n, i;
  logic        v2;
  daddr_t      a2;
  logic        use_b;

  assign use_b = (c.op == OP_ADD);

  always_comb begin
    dra = '0;
    drb = '0;
    if (state == S_RUN) begin
      dra.en   = 1'b1;
      dra.addr = daddr_t'(24'(c.src0) + i);
      drb.en   = use_b;
      drb.addr = daddr_t'(24'(c.src1) + i);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      {n, i, v2, a2, done} <= '0;
      c <= '0;
    end else begin
      done <= 1'b0;
      v2   <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          c     <= cfg;
          n     <= 24'(cfg.h) * 24'(cfg.w) * 24'(cfg.cin_g);
          i     <= '0;
          state <= S_RUN;
        end
        S_RUN: begin
          v2 <= 1'b1;
          a2 <= daddr_t'(24'(c.dst) + i);
          i  <= i + 24'd1;
          if (i == n - 24'd1) state <= S_LAST;
        end
        S_LAST: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  act_t y [LANES];
  for (genvar l = 0; l < LANES; l++) begin : g_lane
    logic signed [47:0] s;
    always_comb begin
      s = (48'(lane(dra_q, l)) <<< c.la);
      if (use_b) s = s + (48'(lane(drb_q, l)) <<< c.lb);
    end
    rshift_clip #(.IN_W(48), .OUT_W(16)) u_rq (.din(s), .r({1'b0, c.sh0}), .dout(y[l]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) dw <= '0;
    else begin
      dw.en      <= v2;
      dw.lane_en <= '1;
      dw.addr    <= a2;
      for (int l = 0; l < LANES; l++) dw.data[l*16 +: 16] <= y[l];
    end
  end
endmodule
