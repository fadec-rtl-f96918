// tb_bram_2r1w: random lane-masked writes and dual-port reads against a
// shadow array; checks one-cycle read latency and read-before-write.
module tb_bram_2r1w;
  localparam int D = 256;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic ra_en, rb_en, w_en;
  logic [7:0] ra_addr, rb_addr, w_addr;
  logic [63:0] ra_data, rb_data, w_data;
  logic [3:0] w_lane;
  logic [63:0] shadow [D];

  bram_2r1w #(.DEPTH(D)) dut (.*);

  initial begin
    {ra_en, rb_en, w_en, ra_addr, rb_addr, w_addr, w_data, w_lane} = '0;
    for (int a = 0; a < D; a++) begin
      @(negedge clk);
      w_en = 1; w_lane = 4'hf; w_addr = 8'(a); w_data = {$urandom, $urandom};
      shadow[a] = w_data;
    end
    @(negedge clk);
    w_en = 0;
    for (int i = 0; i < 3000; i++) begin
      logic [63:0] ea, eb;
      @(negedge clk);
      ra_en = 1; rb_en = 1;
      ra_addr = 8'($urandom); rb_addr = 8'($urandom);
      w_en = 1'($urandom % 2); w_lane = 4'($urandom); w_addr = ($urandom % 4 == 0) ? ra_addr : 8'($urandom);
      w_data = {$urandom, $urandom};
      ea = shadow[ra_addr];
      eb = shadow[rb_addr];
      if (w_en)
        for (int l = 0; l < 4; l++) if (w_lane[l]) shadow[w_addr][l*16 +: 16] = w_data[l*16 +: 16];
      @(negedge clk);
      ra_en = 0; rb_en = 0; w_en = 0;
      checks += 2;
      if (ra_data !== ea) begin failures++; $display("FAIL port a @%0d", ra_addr); end
      if (rb_data !== eb) begin failures++; $display("FAIL port b @%0d", rb_addr); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
