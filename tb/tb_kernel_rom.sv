// tb_kernel_rom: reads every kernel of core 3 out of 8 (and of core 0 in a
// second instance) and compares with the weight formula
// w = ((29*l + 7*co + 13*ci + 5*k + 3*co*ci) mod 16) - 6, co = g*P + PE_ID.
// Also checks the one-cycle read latency.
`timescale 1ns/1ps
module tb_kernel_rom;
  import snn_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [1:0] layer = 0;
  logic [CH_W-1:0] group = 0, ci = 0;
  weight_t w3 [NQ], w0 [NQ];

  kernel_rom #(.P(8), .PE_ID(3)) dut3 (.clk, .layer, .group, .ci, .w(w3));
  kernel_rom #(.P(8), .PE_ID(0)) dut0 (.clk, .layer, .group, .ci, .w(w0));

  function automatic int ref_w(int l, int co, int c, int k);
    return ((29 * l + 7 * co + 13 * c + 5 * k + 3 * co * c) % 16) - 6;
  endfunction

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cin[3] = '{1, 32, 32};
    int grp[3] = '{4, 4, 2};
    for (int l = 0; l < 3; l++)
      for (int g = 0; g < grp[l]; g++)
        for (int c = 0; c < cin[l]; c++) begin
          @(negedge clk);
          layer = 2'(l); group = CH_W'(g); ci = CH_W'(c);
          @(posedge clk); #1;
          for (int k = 0; k < NQ; k++) begin
            checks++;
            if (int'(w3[k]) != ref_w(l, g * 8 + 3, c, k) || int'(w0[k]) != ref_w(l, g * 8, c, k)) begin
              failures++;
              if (failures < 10) $display("l%0d g%0d c%0d k%0d: %0d/%0d", l, g, c, k, w3[k], w0[k]);
            end
          end
          // latency: changing the address does not change the output before the edge
          @(negedge clk);
          ci = CH_W'((c + 1) % cin[l]);
          #1;
          checks++;
          if (int'(w3[0]) != ref_w(l, g * 8 + 3, c, 0)) begin failures++; $display("read not registered"); end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
