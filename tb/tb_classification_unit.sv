// tb_classification_unit: dense output layer.  For several random sets of
// spikes (x, y, c) of the 9x9x10 final feature map, fed one per cycle with
// random gaps, the ten scores must equal sum of W[k][(y*9 + x)*10 + c] over
// the spikes plus 4 times the bias, and the class must be the first index of
// the largest score.  One set is empty (scores are the biases only).  Also
// checks that result_valid rises the cycle after finish and start clears it.
`timescale 1ns/1ps
module tb_classification_unit;
  import snn_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, ev_valid = 0, finish = 0, result_valid;
  qidx_t ev_q = 0;
  ae_word_t ev_word = 0;
  logic [CH_W-1:0] ev_ch = 0;
  logic [3:0] result_class;
  logic signed [15:0] score [N_CLASS];

  classification_unit #(.T_STEPS(4)) dut (.*);

  function automatic int dw(int k, int c, int y, int x);
    return ((17 * k + 11 * c + 5 * y + 3 * x + k * c) % 13) - 6;
  endfunction

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int set = 0; set < 8; set++) begin
      int acc [10], n, best;
      for (int k = 0; k < 10; k++) acc[k] = 4 * ((k % 3) - 1);
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      checks++;
      if (result_valid) begin failures++; $display("start did not clear result_valid"); end
      n = (set == 0) ? 0 : int'($urandom % 300);
      for (int e = 0; e < n; e++) begin
        int x, y, c;
        x = $urandom % 9; y = $urandom % 9; c = $urandom % 10;
        ev_valid = ($urandom % 3 != 0);
        ev_q = qidx_t'(3 * (y % 3) + x % 3);
        ev_word = ae_word_t'((y / 3) * 16 + x / 3);
        ev_ch = CH_W'(c);
        if (ev_valid) for (int k = 0; k < 10; k++) acc[k] += dw(k, c, y, x);
        @(negedge clk);
      end
      ev_valid = 0;
      repeat (2) @(negedge clk);
      finish = 1;
      @(negedge clk);
      finish = 0;
      checks++;
      if (!result_valid) begin failures++; $display("result_valid not set after finish"); end
      best = 0;
      for (int k = 1; k < 10; k++) if (acc[k] > acc[best]) best = k;
      for (int k = 0; k < 10; k++) begin
        checks++;
        if (int'(score[k]) != acc[k]) begin failures++; $display("set %0d score %0d: %0d expected %0d", set, k, score[k], acc[k]); end
      end
      checks++;
      if (int'(result_class) != best) begin failures++; $display("set %0d: class %0d expected %0d", set, result_class, best); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
