// upsample_unit: nearest-neighbour upsampling by two.
//
// Produces a (2h) x (2w) tensor with cin_g channel groups from an h x w
// tensor: output pixel (y, x) copies input pixel (y/2, x/2). The feature
// shrinker's top-down path uses this operator in hardware (bilinear
// upsampling, used elsewhere in the network, runs on the CPU). The factor of
// two is this design's assumption. One 4-channel word is read per cycle and
// written two cycles later; `done` pulses with the last write.
// Descriptor fields: h, w, cin_g, src0, dst.
module upsample_unit
  import fadec_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  input  stage_t cfg,
  output logic   busy,
  output logic   done,
  output drd_t   dr,
  input  word_t  dr_q,
  output dwr_t   dw
);
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_LAST} state_e;
  state_e state;
  stage_t c;
  logic [8:0] oy, ox;
  cg_t        g;
  logic       v2;
  daddr_t     a2;
  logic       last;

  assign last = (g == c.cin_g - 10'd1) && (ox == {c.w, 1'b0} - 9'd1) && (oy == {c.h, 1'b0} - 9'd1);

  always_comb begin
    dr = '0;
    if (state == S_RUN) begin
      dr.en   = 1'b1;
      dr.addr = daddr_t'(c.src0 + (16'(oy >> 1) * 16'(c.w) + 16'(ox >> 1)) * 16'(c.cin_g) + 16'(g));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      {oy, ox, g, v2, a2, done} <= '0;
      c <= '0;
    end else begin
      done <= 1'b0;
      v2   <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          c     <= cfg;
          {oy, ox, g} <= '0;
          state <= S_RUN;
        end
        S_RUN: begin
          v2 <= 1'b1;
          a2 <= daddr_t'(c.dst + (16'(oy) * 16'({c.w, 1'b0}) + 16'(ox)) * 16'(c.cin_g) + 16'(g));
          if (g != c.cin_g - 10'd1) g <= g + 10'd1;
          else begin
            g <= '0;
            if (ox != {c.w, 1'b0} - 9'd1) ox <= ox + 9'd1;
            else begin
              ox <= '0;
              oy <= oy + 9'd1;
            end
          end
          if (last) state <= S_LAST;
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

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) dw <= '0;
    else begin
      dw.en      <= v2;
      dw.lane_en <= '1;
      dw.addr    <= a2;
      dw.data    <= dr_q;
    end
  end
endmodule
