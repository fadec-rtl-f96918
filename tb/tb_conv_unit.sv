// tb_conv_unit: runs all five convolution pipelines, (1,1) (3,1) (3,2) (5,1)
// (5,2), on random tensors, weights, biases, scales, shifts and activations,
// compares the destination region word by word with the golden model, and
// checks the cycle count: one output chunk of OC_PAR channels takes
// OC_PAR/2 + K*K*Cin/IC_PAR + 2 cycles.
module tb_conv_unit;
  import fadec_pkg::*;
  import tb_ref_pkg::*;
  localparam int NCONV = 5;
  localparam int CK [NCONV] = '{1, 3, 3, 5, 5};
  localparam int CS [NCONV] = '{1, 1, 2, 1, 2};
  localparam int DST = 2048;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int sel;
  stage_t cfg;
  logic go [NCONV];
  drd_t dr [NCONV];
  dwr_t dw [NCONV];
  logic pr_en [NCONV], done [NCONV], busy [NCONV];
  paddr_t pr_a [NCONV];
  drd_t mr; dwr_t mw; logic pen; paddr_t pa;
  word_t dq, pq, unused;

  bram_2r1w #(.DEPTH(4096)) u_dmem (.clk, .ra_en(mr.en), .ra_addr(mr.addr[11:0]), .ra_data(dq),
    .rb_en(1'b0), .rb_addr('0), .rb_data(), .w_en(mw.en), .w_lane(mw.lane_en),
    .w_addr(mw.addr[11:0]), .w_data(mw.data));
  bram_2r1w #(.DEPTH(4096)) u_pmem (.clk, .ra_en(pen), .ra_addr(pa[11:0]), .ra_data(pq),
    .rb_en(1'b0), .rb_addr('0), .rb_data(), .w_en(1'b0), .w_lane('0), .w_addr('0), .w_data('0));

  for (genvar u = 0; u < NCONV; u++) begin : g
    conv_unit #(.K(CK[u]), .S(CS[u])) dut (.clk, .rst_n, .start(go[u]), .cfg, .busy(busy[u]),
      .done(done[u]), .dr(dr[u]), .dr_q(dq), .pr_en(pr_en[u]), .pr_addr(pr_a[u]), .pr_q(pq),
      .dw(dw[u]));
  end

  always_comb begin
    mr = dr[sel]; mw = dw[sel]; pen = pr_en[sel]; pa = pr_a[sel];
  end

  task automatic run(int u);
    int K, S, OCP, ho, wo, nch, expc, cyc;
    K = CK[u]; S = CS[u]; OCP = (K == 5) ? 2 : 4;
    cfg = '0;
    cfg.op = OP_CONV; cfg.conv_sel = conv_sel_e'(u);
    cfg.h = 8'(2 + $urandom % 5); cfg.w = 8'(2 + $urandom % 5);
    cfg.cin_g = cg_t'(1 + $urandom % 2);
    cfg.oc_num = cg_t'(1 + $urandom % 2); cfg.oc_first = cg_t'($urandom % 2);
    cfg.cout_g = cfg.oc_first + cfg.oc_num + cg_t'($urandom % 2);
    cfg.src0 = 16'd0; cfg.dst = 16'(DST); cfg.paddr = 16'd0;
    cfg.scale = 8'($signed($urandom % 17) - 8);
    cfg.sh0 = 5'(13 + $urandom % 4); cfg.sh1 = 5'd4;
    cfg.act = act_e'($urandom % 3);
    for (int a = 0; a < 4096; a++) begin
      rmem[a] = rnd_word(12);
      pmem[a] = {$urandom, $urandom};
      u_dmem.mem[a] = rmem[a];
      u_pmem.mem[a] = pmem[a];
    end
    ho  = (int'(cfg.h) + 2 * ((K - 1) / 2) - K) / S + 1;
    wo  = (int'(cfg.w) + 2 * ((K - 1) / 2) - K) / S + 1;
    nch = int'(cfg.oc_num) * 4 / OCP;
    expc = ho * wo * nch * (OCP / 2 + K * K * int'(cfg.cin_g) * 2 + 2) + 2;
    sel = u;
    @(negedge clk);
    go[u] = 1;
    @(negedge clk);
    go[u] = 0;
    cyc = 1;
    while (!done[u]) begin
      @(negedge clk);
      cyc++;
    end
    @(negedge clk);
    ref_conv(cfg, K, S, OCP);
    for (int a = DST; a < 4096; a++) begin
      checks++;
      if (u_dmem.mem[a] !== rmem[a]) begin
        failures++;
        if (failures < 10) $display("FAIL conv%0d word %0d got %h exp %h", u, a, u_dmem.mem[a], rmem[a]);
      end
    end
    checks++;
    if (cyc != expc) begin
      failures++;
      $display("FAIL conv%0d cycles %0d expected %0d", u, cyc, expc);
    end
  endtask

  initial begin
    for (int u = 0; u < NCONV; u++) go[u] = 0;
    sel = 0;
    cfg = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 3; rep++)
      for (int u = 0; u < NCONV; u++) run(u);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
