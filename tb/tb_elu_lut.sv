// tb_elu_lut: sweeps the 16-bit input range for several input formats and
// compares with ELU computed in real arithmetic on the table grid.
module tb_elu_lut;
  import tb_ref_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic signed [15:0] x, y;
  logic [4:0] frac;

  elu_lut dut (.x, .frac, .y);

  initial begin
    for (int f = 4; f <= 14; f += 2)
      for (int v = -32768; v < 32768; v += 5) begin
        x    = 16'(v);
        frac = 5'(f);
        #1;
        checks++;
        if (longint'(y) != elu(longint'(v), f)) begin
          failures++;
          if (failures < 10) $display("FAIL x=%0d frac=%0d got %0d exp %0d", v, f, y, elu(longint'(v), f));
        end
      end
    // x = -8.0 in Q.8 -> exp(-8)-1 = -0.99966 -> -256 in Q.8
    x = -16'sd2048; frac = 5'd8; #1; checks++; if (y != -16'sd256) failures++;
    x = 16'sd300;   frac = 5'd8; #1; checks++; if (y != 16'sd300) failures++;
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
