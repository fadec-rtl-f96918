// tb_stage_sequencer: loads a stage list with every opcode, plays the units
// (done after a random delay) and the CPU (end flag after a random delay),
// and checks that each stage starts exactly the unit its opcode selects, in
// list order, that `cur` holds the stage while it runs, that an extern stage
// waits for the end flag and acknowledges it, and that OP_END finishes.
module tb_stage_sequencer;
  import fadec_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, busy, fin, desc_we, unit_done, ext_req, end_flag, ext_ack;
  logic [8:0] desc_waddr, pc;
  stage_t desc_wdata, cur;
  logic go_conv, go_elt, go_up, go_copy, go_cell, go_hidden, go_dma;
  logic [7:0] ext_op;

  stage_sequencer dut (.clk, .rst_n, .start, .busy, .fin, .desc_we, .desc_waddr, .desc_wdata,
    .cur, .go_conv, .go_elt, .go_up, .go_copy, .go_cell, .go_hidden, .go_dma, .unit_done,
    .ext_req, .ext_op, .end_flag, .ext_ack, .pc);

  localparam int N = 12;
  op_e ops [N] = '{OP_DMA_LOAD, OP_CONV, OP_ADD, OP_RSHIFT, OP_UPSAMPLE, OP_COPY, OP_EXTERN,
                   OP_LSTM_CELL, OP_LSTM_HIDDEN, OP_EXTERN, OP_DMA_STORE, OP_END};
  int seen = 0, acks = 0, fins = 0;

  function automatic op_e which();
    if (go_conv) return OP_CONV;
    if (go_elt) return (cur.op == OP_RSHIFT) ? OP_RSHIFT : OP_ADD;
    if (go_up) return OP_UPSAMPLE;
    if (go_copy) return OP_COPY;
    if (go_cell) return OP_LSTM_CELL;
    if (go_hidden) return OP_LSTM_HIDDEN;
    if (go_dma) return (cur.op == OP_DMA_STORE) ? OP_DMA_STORE : OP_DMA_LOAD;
    return OP_END;
  endfunction

  // unit and CPU stand-ins
  initial begin
    unit_done = 0; end_flag = 0;
    forever begin
      @(negedge clk);
      if (!rst_n) continue;
      if ($countones({go_conv, go_elt, go_up, go_copy, go_cell, go_hidden, go_dma}) > 1) failures++;
      if (go_conv | go_elt | go_up | go_copy | go_cell | go_hidden | go_dma) begin
        checks += 2;
        if (which() != ops[seen]) begin failures++; $display("FAIL stage %0d started %s", seen, which().name()); end
        if (cur.src0 != 16'(seen)) begin failures++; $display("FAIL cur of stage %0d", seen); end
        seen++;
        repeat ($urandom % 6) @(negedge clk);
        unit_done = 1;
        @(negedge clk);
        unit_done = 0;
      end else if (ext_req) begin
        checks += 2;
        if (ops[seen] != OP_EXTERN) begin failures++; $display("FAIL unexpected extern"); end
        if (ext_op != 8'(seen + 100)) failures++;
        seen++;
        repeat (3 + $urandom % 6) @(negedge clk);
        checks++;
        if (!busy || ext_ack) failures++;     // still waiting
        end_flag = 1;
        while (!ext_ack) @(negedge clk);
        acks++;
        @(negedge clk);
        end_flag = 0;
      end
      if (fin) fins++;
    end
  end

  initial begin
    int cyc;
    start = 0; desc_we = 0; desc_waddr = 0; desc_wdata = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < N; k++) begin
      @(negedge clk);
      desc_we = 1; desc_waddr = 9'(k);
      desc_wdata = '0;
      desc_wdata.op = ops[k];
      desc_wdata.src0 = 16'(k);
      desc_wdata.ext_op = 8'(k + 100);
    end
    @(negedge clk);
    desc_we = 0;
    for (int run = 0; run < 2; run++) begin
      seen = 0;
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      cyc = 0;
      while (busy && cyc < 5000) begin @(negedge clk); cyc++; end
      repeat (2) @(negedge clk);
      checks += 2;
      if (seen != N - 1) begin failures++; $display("FAIL %0d stages seen", seen); end
      if (fins != run + 1) begin failures++; $display("FAIL fin count %0d", fins); end
    end
    checks++;
    if (acks != 4) begin failures++; $display("FAIL %0d extern acks", acks); end
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
