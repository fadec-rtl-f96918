// lstm_cell_unit: ConvLSTM cell-state update pipeline.
//
// Per lane of each 4-lane word (n = h*w*cin_g words per tensor) it computes
//   c' = clip(rshift( rshift(sig(rshift(f)), s2) * c
//                   + rshift(sig(rshift(i)), s2) * ELU(g), r))
// which is the cell-state chain of the paper's ConvLSTM hardware: two
// rshift -> sigmoid -> rshift -> multiply rows, one multiplying the old cell
// state and one multiplying ELU of the candidate gate, summed and requantised.
// The network uses ELU where a textbook ConvLSTM uses tanh; the gates' layer
// normalisation is done in software before this stage.
// Operand placement (this design's choice): gate tensors are contiguous at
// src0 (input gate i), src0+n (forget gate f) and src0+2n (candidate g); the
// old cell state is at src1 and c' goes to dst. Four operands per word are
// read in two cycles on the two read ports, so a word takes two cycles; the
// write follows the second read by two cycles and `done` pulses with the last
// write.
// Descriptor fields: h, w, cin_g, src0, src1, dst, sh0 (r), sh1 (sigmoid input
// shift), sh2 (shift after sigmoid), sh3 (fractional bits of g).
module lstm_cell_unit
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
  typedef enum logic [1:0] {S_IDLE, S_A, S_B, S_LAST} state_e;
  state_e state;
  stage_t c;
  logic [23:0] n, k;
  logic        va, vb;
  daddr_t      a2;
  word_t       f_q, c_q;

  always_comb begin
    dra = '0;
    drb = '0;
    if (state == S_A) begin          // forget gate and old cell state
      dra.en   = 1'b1;
      dra.addr = daddr_t'(24'(c.src0) + n + k);
      drb.en   = 1'b1;
      drb.addr = daddr_t'(24'(c.src1) + k);
    end else if (state == S_B) begin // input gate and candidate
      dra.en   = 1'b1;
      dra.addr = daddr_t'(24'(c.src0) + k);
      drb.en   = 1'b1;
      drb.addr = daddr_t'(24'(c.src0) + (n << 1) + k);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      {n, k, va, vb, a2, done, f_q, c_q} <= '0;
      c <= '0;
    end else begin
      done <= 1'b0;
      va   <= (state == S_A);
      vb   <= (state == S_B);
      if (va) begin
        f_q <= dra_q;
        c_q <= drb_q;
      end
      unique case (state)
        S_IDLE: if (start) begin
          c     <= cfg;
          n     <= 24'(cfg.h) * 24'(cfg.w) * 24'(cfg.cin_g);
          k     <= '0;
          state <= S_A;
        end
        S_A: state <= S_B;
        S_B: begin
          a2 <= daddr_t'(24'(c.dst) + k);
          k  <= k + 24'd1;
          state <= (k == n - 24'd1) ? S_LAST : S_A;
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
    act_t sf, si, sf2, si2, eg;
    logic signed [47:0] sum;
    sigmoid_lut u_sf (.x(lane(f_q, l)),   .in_shift(c.sh1), .y(sf));
    sigmoid_lut u_si (.x(lane(dra_q, l)), .in_shift(c.sh1), .y(si));
    rshift_clip #(.IN_W(16), .OUT_W(16)) u_rf (.din(sf), .r({1'b0, c.sh2}), .dout(sf2));
    rshift_clip #(.IN_W(16), .OUT_W(16)) u_ri (.din(si), .r({1'b0, c.sh2}), .dout(si2));
    elu_lut u_eg (.x(lane(drb_q, l)), .frac(c.sh3), .y(eg));
    assign sum = 48'(sf2) * 48'(lane(c_q, l)) + 48'(si2) * 48'(eg);
    rshift_clip #(.IN_W(48), .OUT_W(16)) u_rq (.din(sum), .r({1'b0, c.sh0}), .dout(y[l]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) dw <= '0;
    else begin
      dw.en      <= vb;
      dw.lane_en <= '1;
      dw.addr    <= a2;
      for (int l = 0; l < LANES; l++) dw.data[l*16 +: 16] <= y[l];
    end
  end
endmodule
