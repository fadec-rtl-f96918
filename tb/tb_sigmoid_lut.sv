// tb_sigmoid_lut: sweeps the whole 16-bit input range at several input shifts
// and compares with sigmoid computed in real arithmetic on the same grid.
module tb_sigmoid_lut;
  import tb_ref_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic signed [15:0] x, y;
  logic [4:0] sh;

  sigmoid_lut dut (.x, .in_shift(sh), .y);

  initial begin
    for (int s = 0; s <= 12; s += 3)
      for (int v = -32768; v < 32768; v += 7) begin
        x  = 16'(v);
        sh = 5'(s);
        #1;
        checks++;
        if (longint'(y) != sig(longint'(v), s)) begin
          failures++;
          if (failures < 10) $display("FAIL x=%0d sh=%0d got %0d exp %0d", v, s, y, sig(longint'(v), s));
        end
      end
    // symmetry and saturation at the table ends
    x = 16'sd0;    sh = 5'd4; #1; checks++; if (y != 16'sd8192) failures++;
    x = 16'sd3000; sh = 5'd4; #1; checks++; if (y != 16'sd16378) failures++;
    x = -16'sd3000; sh = 5'd4; #1; checks++; if (y != 16'sd6) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
