// stage_sequencer: the controller FSM that runs the accelerator's stage list.
//
// The stage list is a RAM of N_DESC stage descriptors (fadec_pkg::stage_t),
// written by the CPU through extern_regs before the first frame. On `start`
// the sequencer fetches entry 0, then for each entry: latches it as the
// current stage (`cur`, which every unit reads as its configuration), pulses
// the start input of the unit that the opcode selects, and waits for that
// unit's done pulse; then it fetches the next entry. Only one stage runs at a
// time. An OP_EXTERN stage instead pulses `ext_req` with the descriptor's
// opcode and waits until the CPU has set the end flag, answers with
// `ext_ack` and goes on. OP_END pulses `fin` and returns to idle. Fetch and
// dispatch cost three cycles per stage on top of the unit's own time.
// In the paper the controller is a hard-wired FSM generated together with
// the datapath for one network; a descriptor list run by a fixed FSM, so
// that the RTL does not depend on one trained model, is this design's choice.
module stage_sequencer
  import fadec_pkg::*;
#(
  parameter int unsigned N_DESC = 512,
  localparam int unsigned IW = $clog2(N_DESC)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  output logic          busy,
  output logic          fin,
  // descriptor RAM write port
  input  logic          desc_we,
  input  logic [IW-1:0] desc_waddr,
  input  stage_t        desc_wdata,
  // current stage and unit handshakes
  output stage_t        cur,
  output logic          go_conv,
  output logic          go_elt,
  output logic          go_up,
  output logic          go_copy,
  output logic          go_cell,
  output logic          go_hidden,
  output logic          go_dma,
  input  logic          unit_done,
  // extern hand-off
  output logic          ext_req,
  output logic [7:0]    ext_op,
  input  logic          end_flag,
  output logic          ext_ack,
  output logic [IW-1:0] pc
);
  typedef enum logic [2:0] {S_IDLE, S_FETCH, S_LATCH, S_DISPATCH, S_WAIT, S_EXT} state_e;
  state_e state;

  stage_t desc_mem [N_DESC];
  stage_t desc_q;

  always_ff @(posedge clk) begin
    if (desc_we) desc_mem[desc_waddr] <= desc_wdata;
    if (state == S_FETCH) desc_q <= desc_mem[pc];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      cur   <= '0;
      pc    <= '0;
      {fin, go_conv, go_elt, go_up, go_copy, go_cell, go_hidden, go_dma, ext_req, ext_op, ext_ack} <= '0;
    end else begin
      {fin, go_conv, go_elt, go_up, go_copy, go_cell, go_hidden, go_dma, ext_req, ext_ack} <= '0;
      unique case (state)
        S_IDLE: if (start) begin
          pc    <= '0;
          state <= S_FETCH;
        end
        S_FETCH: state <= S_LATCH;
        S_LATCH: begin
          cur   <= desc_q;
          state <= S_DISPATCH;
        end
        S_DISPATCH: begin
          state <= S_WAIT;
          unique case (cur.op)
            OP_CONV:                   go_conv   <= 1'b1;
            OP_ADD, OP_RSHIFT:         go_elt    <= 1'b1;
            OP_UPSAMPLE:               go_up     <= 1'b1;
            OP_COPY:                   go_copy   <= 1'b1;
            OP_LSTM_CELL:              go_cell   <= 1'b1;
            OP_LSTM_HIDDEN:            go_hidden <= 1'b1;
            OP_DMA_LOAD, OP_DMA_STORE: go_dma    <= 1'b1;
            OP_EXTERN: begin
              ext_req <= 1'b1;
              ext_op  <= cur.ext_op;
              state   <= S_EXT;
            end
            default: begin         // OP_END and unused opcodes
              fin   <= 1'b1;
              state <= S_IDLE;
            end
          endcase
        end
        S_WAIT: if (unit_done) begin
          pc    <= pc + 1'b1;
          state <= S_FETCH;
        end
        S_EXT: if (end_flag) begin
          ext_ack <= 1'b1;
          pc      <= pc + 1'b1;
          state   <= S_FETCH;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);
endmodule
