// dma_controller: moves blocks of 64-bit words between DRAM and the on-chip
// memories over an AXI4 master port.
//
// A command (start, store, to_param, bram_addr, dram_addr, len) transfers len
// words. Loads (store = 0) read DRAM with INCR bursts and write each returned
// beat straight into the data memory or, with to_param = 1, the parameter
// memory. Stores (store = 1) read the data memory and write DRAM. Bursts are at
// most MAX_BURST beats and never cross a 4 KiB boundary; one burst is
// outstanding at a time. A load beat takes one cycle when the slave streams;
// a store beat takes three cycles (memory read, latch, handshake). `done`
// pulses when the last beat (load) or the last write response (store) has
// arrived. The paper shows only a DMA controller between the AXI bus and the
// memories; the burst scheme and the timing are this design's choices.
// dram_addr must be 8-byte aligned. AXI errors (xRESP) are not handled.
// The beat data passes straight through (AXI read data to the memory write
// port, memory read data to AXI write data), and the burst size, burst type
// and write strobes are constant (full 64-bit INCR beats).
module dma_controller
  import fadec_pkg::*;
#(
  parameter int unsigned MAX_BURST = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  // command
  input  logic        start,
  input  logic        store,
  input  logic        to_param,
  input  logic [15:0] bram_addr,
  input  logic [31:0] dram_addr,
  input  logic [19:0] len,
  output logic        busy,
  output logic        done,
  // on-chip memory side
  output dwr_t        dw,        // data memory write (to_param = 0)
  output logic        pw_en,     // parameter memory write (to_param = 1)
  output paddr_t      pw_addr,
  output word_t       pw_data,
  output drd_t        dr,        // data memory read (stores)
  input  word_t       dr_q,
  // AXI4 master
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
  output logic        m_axi_bready
);
  typedef enum logic [2:0] {S_IDLE, S_AR, S_R, S_AW, S_WRD, S_WLAT, S_W, S_B} state_e;
  state_e      state;
  logic        st, tp;
  logic [15:0] baddr;
  logic [31:0] daddr;
  logic [19:0] remain;
  logic [8:0]  beats, beat;
  logic [63:0] wdata_r;

  // beats of the next burst: limited by MAX_BURST, what remains and the 4 KiB page
  function automatic logic [8:0] burst_len(input logic [31:0] a, input logic [19:0] rem);
    logic [9:0] to_page;
    logic [8:0] b;
    to_page = 10'((13'h1000 - {1'b0, a[11:0]}) >> 3);
    b = 9'(MAX_BURST);
    if (20'(b) > rem) b = 9'(rem);
    if (10'(b) > to_page) b = 9'(to_page);
    return b;
  endfunction

  assign busy          = (state != S_IDLE);
  assign m_axi_araddr  = daddr;
  assign m_axi_awaddr  = daddr;
  assign m_axi_arlen   = 8'(beats - 9'd1);
  assign m_axi_awlen   = 8'(beats - 9'd1);
  assign m_axi_arsize  = 3'd3;
  assign m_axi_awsize  = 3'd3;
  assign m_axi_arburst = 2'b01;
  assign m_axi_awburst = 2'b01;
  assign m_axi_arvalid = (state == S_AR);
  assign m_axi_awvalid = (state == S_AW);
  assign m_axi_rready  = (state == S_R);
  assign m_axi_wvalid  = (state == S_W);
  assign m_axi_wdata   = wdata_r;
  assign m_axi_wstrb   = 8'hff;
  assign m_axi_wlast   = (state == S_W) && (beat == beats - 9'd1);
  assign m_axi_bready  = (state == S_B);

  logic rbeat;
  assign rbeat = (state == S_R) && m_axi_rvalid;

  always_comb begin
    dw         = '0;
    dw.en      = rbeat && !tp;
    dw.lane_en = '1;
    dw.addr    = daddr_t'(baddr);
    dw.data    = m_axi_rdata;
    pw_en      = rbeat && tp;
    pw_addr    = paddr_t'(baddr);
    pw_data    = m_axi_rdata;
    dr         = '0;
    dr.en      = (state == S_WRD);
    dr.addr    = daddr_t'(baddr);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      {st, tp, baddr, daddr, remain, beats, beat, wdata_r, done} <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          st     <= store;
          tp     <= to_param;
          baddr  <= bram_addr;
          daddr  <= dram_addr;
          remain <= len;
          beats  <= burst_len(dram_addr, len);
          beat   <= '0;
          if (len == '0) done <= 1'b1;
          else state <= store ? S_AW : S_AR;
        end
        S_AR: if (m_axi_arready) state <= S_R;
        S_R: if (m_axi_rvalid) begin
          baddr  <= baddr + 16'd1;
          remain <= remain - 20'd1;
          if (m_axi_rlast) begin
            daddr <= daddr + {20'd0, beats, 3'd0};
            beats <= burst_len(daddr + {20'd0, beats, 3'd0}, remain - 20'd1);
            if (remain == 20'd1) begin
              done  <= 1'b1;
              state <= S_IDLE;
            end else state <= S_AR;
          end
        end
        S_AW: if (m_axi_awready) begin
          beat  <= '0;
          state <= S_WRD;
        end
        S_WRD:  state <= S_WLAT;
        S_WLAT: begin
          wdata_r <= dr_q;
          state   <= S_W;
        end
        S_W: if (m_axi_wready) begin
          baddr  <= baddr + 16'd1;
          remain <= remain - 20'd1;
          beat   <= beat + 9'd1;
          state  <= (beat == beats - 9'd1) ? S_B : S_WRD;
        end
        S_B: if (m_axi_bvalid) begin
          daddr <= daddr + {20'd0, beats, 3'd0};
          beats <= burst_len(daddr + {20'd0, beats, 3'd0}, remain);
          if (remain == '0) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else state <= S_AW;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // AXI rule: a valid request holds its value until it is accepted.
  a_awvalid_stable: assert property (@(posedge clk) disable iff (!rst_n)
      m_axi_awvalid && !m_axi_awready |=> m_axi_awvalid && $stable(m_axi_awaddr));
  a_arvalid_stable: assert property (@(posedge clk) disable iff (!rst_n)
      m_axi_arvalid && !m_axi_arready |=> m_axi_arvalid && $stable(m_axi_araddr));
  a_wvalid_stable: assert property (@(posedge clk) disable iff (!rst_n)
      m_axi_wvalid && !m_axi_wready |=> m_axi_wvalid && $stable(m_axi_wdata));
endmodule
