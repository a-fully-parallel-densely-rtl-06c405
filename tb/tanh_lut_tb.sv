// tanh_lut_tb: exhaustive check of the 4-level tanh table on every 16-bit
// input, plus every input of an 8-level table on an 8-bit grid, checked
// against the real-arithmetic model in pimi_ref_pkg.
module tanh_lut_tb;
  import pimi_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic signed [15:0] x16, y16;
  logic signed [7:0]  x8,  y8;
  tanh_lut #(.W(16), .F(12), .L(4)) dut   (.x(x16), .y(y16));
  tanh_lut #(.W(8),  .F(4),  .L(8)) dut_8 (.x(x8),  .y(y8));

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = -32768; v < 32768; v++) begin
      x16 = 16'(v);
      #1;
      checks++;
      if (longint'(y16) != tanh_q(longint'(v), 12, 4)) begin
        failures++;
        if (failures < 10) $display("L4 x=%0d got %0d exp %0d", v, y16, tanh_q(longint'(v), 12, 4));
      end
    end
    // spot values of the 4-level table: -1, -1/3, +1/3, +1
    x16 = -16'sd5000; #1; checks++; if (y16 != -16'sd4096) failures++;
    x16 = -16'sd1000; #1; checks++; if (y16 != -16'sd1365) failures++;
    x16 =  16'sd0;    #1; checks++; if (y16 !=  16'sd1365) failures++;
    x16 =  16'sd3000; #1; checks++; if (y16 !=  16'sd4096) failures++;
    for (int v = -128; v < 128; v++) begin
      x8 = 8'(v);
      #1;
      checks++;
      if (longint'(y8) != tanh_q(longint'(v), 4, 8)) begin
        failures++;
        if (failures < 10) $display("L8 x=%0d got %0d exp %0d", v, y8, tanh_q(longint'(v), 4, 8));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
