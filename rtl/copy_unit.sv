// copy_unit: channel-group copy, used for concatenation and slicing.
//
// For each of the h*w pixels it copies oc_num consecutive channel groups
// (4 channels each), starting at group soff of the source tensor (cin_g groups
// per pixel), to group oc_first onward of the destination tensor (cout_g
// groups per pixel). A concatenation of two or three tensors is two or three
// such stages into one destination; a slice is one stage that picks a channel
// range. These operators are pure data movement in the paper; building a
// multi-input concatenation from single-input copies, at 4-channel
// granularity, is this design's choice. One word per cycle; `done` pulses with
// the last write.
// Descriptor fields: h, w, cin_g, cout_g, soff, oc_first, oc_num, src0, dst.
module copy_unit
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
  logic [15:0] px, npx;
  cg_t         g;
  logic        v2;
  daddr_t      a2;

  always_comb begin
    dr = '0;
    if (state == S_RUN) begin
      dr.en   = 1'b1;
      dr.addr = daddr_t'(c.src0 + px * 16'(c.cin_g) + 16'(c.soff) + 16'(g));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      {px, npx, g, v2, a2, done} <= '0;
      c <= '0;
    end else begin
      done <= 1'b0;
      v2   <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          c     <= cfg;
          npx   <= 16'(cfg.h) * 16'(cfg.w);
          {px, g} <= '0;
          state <= S_RUN;
        end
        S_RUN: begin
          v2 <= 1'b1;
          a2 <= daddr_t'(c.dst + px * 16'(c.cout_g) + 16'(c.oc_first) + 16'(g));
          if (g != c.oc_num - 10'd1) g <= g + 10'd1;
          else begin
            g  <= '0;
            px <= px + 16'd1;
            if (px == npx - 16'd1) state <= S_LAST;
          end
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
