// tb_bias_rom: reads the bias of every channel group of core 5 of 8 and
// compares with b = ((5*co + 3*l) mod 7) - 3, co = g*P + PE_ID; checks the
// one-cycle read latency.
`timescale 1ns/1ps
module tb_bias_rom;
  import snn_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [1:0] layer = 0;
  logic [CH_W-1:0] group = 0;
  weight_t b;

  bias_rom #(.P(8), .PE_ID(5)) dut (.clk, .layer, .group, .b);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int grp[3] = '{4, 4, 2};
    for (int l = 0; l < 3; l++)
      for (int g = 0; g < grp[l]; g++) begin
        @(negedge clk);
        layer = 2'(l); group = CH_W'(g);
        #1;
        @(posedge clk); #1;
        checks++;
        if (int'(b) != ((5 * (g * 8 + 5) + 3 * l) % 7) - 3) begin
          failures++; $display("l%0d g%0d: %0d", l, g, b);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
