// lstm_hidden_unit: ConvLSTM hidden-state output pipeline.
//
// Per lane of each 4-lane word (n = h*w*cin_g words) it computes
//   h = clip(rshift(sig(rshift(o)) * ELU(c'), r))
// the hidden-state chain of the paper's ConvLSTM hardware: the output gate
// passes rshift -> sigmoid, the new cell state passes ELU, and their product
// is requantised. The output gate is read at src0 and the new cell state at
// src1 in the same cycle; the result is written to dst two cycles later, one
// word per cycle. `done` pulses with the last write.
// Descriptor fields: h, w, cin_g, src0, src1, dst, sh0 (r), sh1 (sigmoid input
// shift), sh3 (fractional bits of c').
module lstm_hidden_unit
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
  logic [23:0] n, k;
  logic        v2;
  daddr_t      a2;

  always_comb begin
    dra = '0;
    drb = '0;
    if (state == S_RUN) begin
      dra.en   = 1'b1;
      dra.addr = daddr_t'(24'(c.src0) + k);
      drb.en   = 1'b1;
      drb.addr = daddr_t'(24'(c.src1) + k);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      {n, k, v2, a2, done} <= '0;
      c <= '0;
    end else begin
      done <= 1'b0;
      v2   <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          c     <= cfg;
          n     <= 24'(cfg.h) * 24'(cfg.w) * 24'(cfg.cin_g);
          k     <= '0;
          state <= S_RUN;
        end
        S_RUN: begin
          v2 <= 1'b1;
          a2 <= daddr_t'(24'(c.dst) + k);
          k  <= k + 24'd1;
          if (k == n - 24'd1) state <= S_LAST;
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
    act_t so, ec;
    logic signed [47:0] prod;
    sigmoid_lut u_so (.x(lane(dra_q, l)), .in_shift(c.sh1), .y(so));
    elu_lut     u_ec (.x(lane(drb_q, l)), .frac(c.sh3), .y(ec));
    assign prod = 48'(so) * 48'(ec);
    rshift_clip #(.IN_W(48), .OUT_W(16)) u_rq (.din(prod), .r({1'b0, c.sh0}), .dout(y[l]));
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
