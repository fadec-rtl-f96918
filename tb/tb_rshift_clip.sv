// tb_rshift_clip: random and corner-case check of the requantiser against the
// reference rshift-with-rounding and clip.
module tb_rshift_clip;
  import tb_ref_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic signed [47:0] din;
  logic [5:0] r;
  logic signed [15:0] dout;

  rshift_clip #(.IN_W(48), .OUT_W(16)) dut (.din, .r, .dout);

  task automatic check1(longint v, int rr);
    din = 48'(v);
    r   = 6'(rr);
    #1;
    checks++;
    if (longint'(dout) != rsc(v, rr)) begin
      failures++;
      $display("FAIL v=%0d r=%0d got %0d exp %0d", v, rr, dout, rsc(v, rr));
    end
  endtask

  initial begin
    check1(5, 1); check1(-5, 1); check1(6, 2); check1(-6, 2); check1(7, 0);
    check1(40000, 0); check1(-40000, 0); check1(65535, 1); check1(-65537, 1);
    for (int i = 0; i < 2000; i++)
      check1(longint'($signed({$urandom, $urandom})) >>> (16 + $urandom % 40), int'($urandom % 33));
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
