// tb_extern_regs: drives the AXI4-Lite port as the CPU would and the
// accelerator side as the sequencer would. Checks descriptor loading, the
// start pulse, status bits, and the extern hand-off: opcode visible to
// polling, end flag only accepted while a request is pending, cleared by the
// accelerator's acknowledge.
module tb_extern_regs;
  import fadec_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [7:0] awaddr, araddr; logic awvalid, awready, wvalid, wready, bvalid, bready;
  logic arvalid, arready, rvalid, rready; logic [31:0] wdata, rdata; logic [1:0] bresp, rresp;
  logic start, busy, fin, ext_req, ext_ack, end_flag, irq, desc_we;
  logic [7:0] ext_op; logic [8:0] desc_waddr; logic [DESC_W-1:0] desc_wdata;
  logic [DESC_W-1:0] got [512];
  int starts = 0;

  extern_regs dut (.clk, .rst_n, .s_axil_awaddr(awaddr), .s_axil_awvalid(awvalid),
    .s_axil_awready(awready), .s_axil_wdata(wdata), .s_axil_wvalid(wvalid), .s_axil_wready(wready),
    .s_axil_bresp(bresp), .s_axil_bvalid(bvalid), .s_axil_bready(bready), .s_axil_araddr(araddr),
    .s_axil_arvalid(arvalid), .s_axil_arready(arready), .s_axil_rdata(rdata), .s_axil_rresp(rresp),
    .s_axil_rvalid(rvalid), .s_axil_rready(rready), .start, .busy, .fin, .ext_req, .ext_op,
    .ext_ack, .end_flag, .irq, .desc_we, .desc_waddr, .desc_wdata);

  always_ff @(posedge clk) begin
    if (desc_we) got[desc_waddr] <= desc_wdata;
    if (start && rst_n) starts <= starts + 1;
  end

  task automatic wr(logic [7:0] a, logic [31:0] d);
    @(negedge clk);
    awaddr = a; wdata = d; awvalid = 1; wvalid = 1;
    #1;
    while (!(awready && wready)) @(negedge clk);
    @(negedge clk);
    awvalid = 0; wvalid = 0; bready = 1;
    while (!bvalid) @(negedge clk);
    @(negedge clk);
    bready = 0;
  endtask

  task automatic rd(logic [7:0] a, output logic [31:0] d);
    @(negedge clk);
    araddr = a; arvalid = 1;
    #1;
    while (!arready) @(negedge clk);
    @(negedge clk);
    arvalid = 0; rready = 1;
    while (!rvalid) @(negedge clk);
    d = rdata;
    @(negedge clk);
    rready = 0;
  endtask

  task automatic expect_eq(string what, logic [31:0] g, logic [31:0] e);
    checks++;
    if (g !== e) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, g, e);
    end
  endtask

  initial begin
    logic [31:0] d;
    logic [DESC_W-1:0] ref_desc [4];
    {awaddr, araddr, awvalid, wvalid, bready, arvalid, rready, wdata} = '0;
    {busy, fin, ext_req, ext_ack, ext_op} = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // load four descriptors starting at index 5
    wr(8'h10, 32'd5);
    for (int k = 0; k < 4; k++) begin
      for (int j = 0; j < 8; j++) begin
        ref_desc[k][j*32 +: 32] = $urandom;
        wr(8'h20 + 8'(4 * j), ref_desc[k][j*32 +: 32]);
      end
      wr(8'h14, 32'd1);
    end
    for (int k = 0; k < 4; k++) begin
      checks++;
      if (got[5 + k] !== ref_desc[k]) begin failures++; $display("FAIL descriptor %0d", k); end
    end
    rd(8'h10, d); expect_eq("DESC_IDX", d, 32'd9);
    rd(8'h24, d); expect_eq("DESC_DATA1 readback", d, ref_desc[3][63:32]);
    // start, busy, done
    wr(8'h00, 32'd1);
    expect_eq("start pulses", 32'(starts), 32'd1);
    busy = 1;
    rd(8'h04, d); expect_eq("STATUS busy", d, 32'h1);
    // end flag without a pending request is ignored
    wr(8'h0C, 32'd1);
    rd(8'h0C, d); expect_eq("ENDFLAG ignored", d, 32'h0);
    // extern hand-off
    @(negedge clk); ext_req = 1; ext_op = 8'h5a;
    @(negedge clk); ext_req = 0;
    expect_eq("irq", 32'(irq), 32'd1);
    rd(8'h08, d); expect_eq("OPCODE", d, 32'h8000005a);
    rd(8'h04, d); expect_eq("STATUS pending", d, 32'h5);
    expect_eq("no end flag yet", 32'(end_flag), 32'd0);
    wr(8'h0C, 32'd1);
    expect_eq("end flag", 32'(end_flag), 32'd1);
    @(negedge clk); ext_ack = 1;
    @(negedge clk); ext_ack = 0;
    expect_eq("end flag cleared", 32'(end_flag), 32'd0);
    expect_eq("irq cleared", 32'(irq), 32'd0);
    rd(8'h08, d); expect_eq("OPCODE not pending", d, 32'h5a);
    // finish
    busy = 0;
    @(negedge clk); fin = 1;
    @(negedge clk); fin = 0;
    rd(8'h04, d); expect_eq("STATUS done", d, 32'h2);
    wr(8'h00, 32'd1);
    rd(8'h04, d); expect_eq("done cleared by start", d, 32'h0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
