// extern_regs: the register block through which the CPU and the accelerator
// hand work to each other ("extern" stages), plus start/status and loading of
// the stage list.
//
// HW/SW hand-off, following the paper's interrupt-handling scheme: when the
// accelerator reaches an extern stage it has already stored the data for the
// CPU in DRAM; it then writes the opcode of the CPU process into OPCODE and
// raises `irq`/pending. The CPU polls OPCODE, reads the data, runs the process,
// writes its results to DRAM and writes 1 to ENDFLAG. The accelerator reads
// the flag (`end_flag`), answers with `ext_ack`, which clears both the pending
// opcode and the flag, and resumes.
//
// Register map (32-bit AXI4-Lite slave, byte addresses; this design's own):
//   0x00 CTRL      W  bit0: start the stage list from entry 0
//   0x04 STATUS    R  bit0 busy, bit1 done (sticky until next start), bit2 pending
//   0x08 OPCODE    R  [7:0] opcode of the requested CPU process, bit31 pending
//   0x0C ENDFLAG   RW write bit0 = 1 when the CPU process has finished
//   0x10 DESC_IDX  RW index of the next descriptor to write
//   0x14 DESC_PUSH W  writes DESC_DATA0..7 to entry DESC_IDX, then DESC_IDX++
//   0x20-0x3C DESC_DATA0..7 RW 256-bit staging word, DATA0 = bits 31:0
// Writes need AW and W in the same cycle; each access takes one cycle plus
// the response handshake.
// Every access is answered OKAY, so bresp and rresp are constant.
module extern_regs
  import fadec_pkg::*;
#(
  parameter int unsigned N_DESC = 512
) (
  input  logic        clk,
  input  logic        rst_n,
  // AXI4-Lite slave
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
  // accelerator side
  output logic        start,
  input  logic        busy,
  input  logic        fin,        // stage list finished (pulse)
  input  logic        ext_req,    // extern stage reached (pulse)
  input  logic [7:0]  ext_op,
  input  logic        ext_ack,    // accelerator has seen the end flag (pulse)
  output logic        end_flag,
  output logic        irq,
  output logic        desc_we,
  output logic [$clog2(N_DESC)-1:0] desc_waddr,
  output logic [DESC_W-1:0]         desc_wdata
);
  localparam int unsigned IW = $clog2(N_DESC);

  logic        done_r, pending;
  logic [7:0]  opcode;
  logic [IW-1:0] idx;
  logic [31:0] stage_w [8];

  logic wr;
  assign wr             = s_axil_awvalid && s_axil_wvalid && !s_axil_bvalid;
  assign s_axil_awready = wr;
  assign s_axil_wready  = wr;
  assign s_axil_bresp   = 2'b00;
  assign s_axil_rresp   = 2'b00;
  assign s_axil_arready = !s_axil_rvalid;
  assign irq            = pending;

  always_comb
    for (int j = 0; j < 8; j++) desc_wdata[j*32 +: 32] = stage_w[j];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      {done_r, pending, opcode, idx, end_flag, start, desc_we, desc_waddr} <= '0;
      s_axil_bvalid <= 1'b0;
      s_axil_rvalid <= 1'b0;
      s_axil_rdata  <= '0;
      for (int j = 0; j < 8; j++) stage_w[j] <= '0;
    end else begin
      start   <= 1'b0;
      desc_we <= 1'b0;
      if (fin) done_r <= 1'b1;
      if (ext_req) begin
        opcode  <= ext_op;
        pending <= 1'b1;
      end
      if (ext_ack) begin
        pending  <= 1'b0;
        end_flag <= 1'b0;
      end
      // write channel
      if (s_axil_bvalid && s_axil_bready) s_axil_bvalid <= 1'b0;
      if (wr) begin
        s_axil_bvalid <= 1'b1;
        unique casez (s_axil_awaddr)
          8'h00: if (s_axil_wdata[0]) begin
            start  <= 1'b1;
            done_r <= 1'b0;
          end
          8'h0C: if (s_axil_wdata[0] && pending) end_flag <= 1'b1;
          8'h10: idx <= IW'(s_axil_wdata);
          8'h14: begin
            desc_we    <= 1'b1;
            desc_waddr <= idx;
            idx        <= idx + 1'b1;
          end
          8'b001?_??00: stage_w[s_axil_awaddr[4:2]] <= s_axil_wdata;
          default: ;
        endcase
      end
      // read channel
      if (s_axil_rvalid && s_axil_rready) s_axil_rvalid <= 1'b0;
      if (s_axil_arvalid && !s_axil_rvalid) begin
        s_axil_rvalid <= 1'b1;
        unique casez (s_axil_araddr)
          8'h04:        s_axil_rdata <= {29'd0, pending, done_r, busy};
          8'h08:        s_axil_rdata <= {pending, 23'd0, opcode};
          8'h0C:        s_axil_rdata <= {31'd0, end_flag};
          8'h10:        s_axil_rdata <= 32'(idx);
          8'b001?_??00: s_axil_rdata <= stage_w[s_axil_araddr[4:2]];
          default:      s_axil_rdata <= '0;
        endcase
      end
    end
  end

  a_b_hold: assert property (@(posedge clk) disable iff (!rst_n)
      s_axil_bvalid && !s_axil_bready |=> s_axil_bvalid);
  a_r_hold: assert property (@(posedge clk) disable iff (!rst_n)
      s_axil_rvalid && !s_axil_rready |=> s_axil_rvalid && $stable(s_axil_rdata));
endmodule
