// tb_lstm_cell_unit: checks the ConvLSTM cell-state update with random shifts on random tensors against the golden model,
// word by word over the whole destination region, and checks the stage's
// cycle count (issue rate one read slot per cycle).
module tb_lstm_cell_unit;
  import fadec_pkg::*;
  import tb_ref_pkg::*;
  localparam int DST = 2048;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  stage_t cfg;
  logic go, done, busy;
  drd_t dra, drb;
  dwr_t dw;
  word_t qa, qb;

  bram_2r1w #(.DEPTH(4096)) u_dmem (.clk, .ra_en(dra.en), .ra_addr(dra.addr[11:0]), .ra_data(qa),
    .rb_en(drb.en), .rb_addr(drb.addr[11:0]), .rb_data(qb), .w_en(dw.en), .w_lane(dw.lane_en),
    .w_addr(dw.addr[11:0]), .w_data(dw.data));

  lstm_cell_unit dut (.clk, .rst_n, .start(go), .cfg, .busy, .done, .dra(dra), .drb(drb), .dra_q(qa), .drb_q(qb), .dw);

  task automatic run(int rep);
    int cyc, expc;
    cfg = '0;
    cfg.h = 8'(1 + $urandom % 6); cfg.w = 8'(1 + $urandom % 6); cfg.cin_g = cg_t'(1 + $urandom % 3);
    cfg.src0 = 16'd0; cfg.src1 = 16'd1024; cfg.dst = 16'(DST);
    cfg.op = OP_LSTM_CELL; cfg.sh1 = 5'(6 + $urandom % 4); cfg.sh2 = 5'(2 + $urandom % 4);
    cfg.sh3 = 5'(8 + $urandom % 4); cfg.sh0 = 5'(10 + $urandom % 4);
    for (int a = 0; a < 4096; a++) begin
      rmem[a] = rnd_word(13);
      u_dmem.mem[a] = rmem[a];
    end
    expc = 2 * int'(cfg.h) * int'(cfg.w) * int'(cfg.cin_g) + 2;
    @(negedge clk);
    go = 1;
    @(negedge clk);
    go = 0;
    cyc = 1;
    while (!done) begin
      @(negedge clk);
      cyc++;
    end
    @(negedge clk);
    ref_cell(cfg);
    for (int a = DST; a < 4096; a++) begin
      checks++;
      if (u_dmem.mem[a] !== rmem[a]) begin
        failures++;
        if (failures < 10) $display("FAIL word %0d got %h exp %h", a, u_dmem.mem[a], rmem[a]);
      end
    end
    checks++;
    if (cyc != expc) begin
      failures++;
      $display("FAIL cycles %0d expected %0d", cyc, expc);
    end
  endtask

  initial begin
    go = 0;
    cfg = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 8; rep++) run(rep);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
