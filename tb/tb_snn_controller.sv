// tb_snn_controller: schedule of one inference.  The cores are replaced by a
// responder that ends each segment replay and each thresholding pass after a
// random number of cycles and holds busy for a while after the clear.  The
// testbench computes the expected schedule with its own loops and checks:
// 784 pixels accepted in raster order (ld_x, ld_y), four input thresholding
// passes, then for every conv layer / group / time step / input channel one
// replay request with the right core (ci mod 8), local segment and active
// mask, one thresholding request per group and time step, four new_layer
// pulses, 40 classification segments in channel-major order, and done.
`timescale 1ns/1ps
module tb_snn_controller;
  import snn_pkg::*;
  localparam int P = 8, T = 4;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, done, in_valid = 0, in_ready, ld_we;
  xy_t ld_x, ld_y;
  logic clear, pool, conv_phase, thr_input, last_t, new_layer;
  logic [1:0] layer;
  logic [CH_W-1:0] group, ci, cls_ch;
  logic [4:0] map_w;
  logic [CW-1:0] win_w;
  logic [P-1:0] active, thr_start, rd_start;
  logic [3:0] out_seg, rd_seg;
  logic [2:0] src;
  logic rd_done = 0, busy = 0, thr_done = 0;
  logic cls_start, cls_phase, cls_finish;

  snn_controller #(.P(P), .T_STEPS(T)) dut (.*);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  // expected events, encoded as strings
  string exp_ev[$];
  int n_newl = 0, n_done = 0, n_pix = 0, rd_wait = -1, thr_wait = -1, busy_cnt = 0;

  // responder and monitor
  always @(negedge clk) if (rst_n) begin
    string s;
    rd_done  <= 0;
    thr_done <= 0;
    if (busy_cnt > 0) busy_cnt--;
    busy <= (busy_cnt > 0);
    if (clear) busy_cnt = 20;
    if (ld_we) begin
      chk(int'(ld_x) == n_pix % 28 && int'(ld_y) == n_pix / 28, $sformatf("pixel %0d at (%0d,%0d)", n_pix, ld_x, ld_y));
      n_pix++;
    end
    if (|rd_start) begin
      if (cls_phase) s = $sformatf("C c%0d seg%0d src%0d", cls_ch, rd_seg, src);
      else s = $sformatf("R l%0d g%0d seg%0d src%0d act%h w%0d", layer, group, rd_seg, src, active, map_w);
      chk(exp_ev.size() > 0 && exp_ev[0] == s, $sformatf("got '%s' expected '%s'", s, exp_ev.size() ? exp_ev[0] : "-"));
      chk(rd_start == (8'd1 << src), "one core starts its queue");
      if (exp_ev.size()) void'(exp_ev.pop_front());
      rd_wait = $urandom % 4;
    end else if (rd_wait == 0) begin
      rd_done <= 1; rd_wait = -1;
    end else if (rd_wait > 0) rd_wait--;
    if (|thr_start) begin
      s = thr_input ? $sformatf("I last%0d", last_t) :
          $sformatf("T l%0d g%0d oseg%0d act%h last%0d pool%0d", layer, group, out_seg, thr_start, last_t, pool);
      chk(exp_ev.size() > 0 && exp_ev[0] == s, $sformatf("got '%s' expected '%s'", s, exp_ev.size() ? exp_ev[0] : "-"));
      if (exp_ev.size()) void'(exp_ev.pop_front());
      thr_wait = 3 + $urandom % 5;
    end else if (thr_wait == 0) begin
      thr_done <= 1; thr_wait = -1;
    end else if (thr_wait > 0) thr_wait--;
    if (new_layer) n_newl++;
    if (done) n_done++;
  end

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cin [3] = '{1, 32, 32};
    int cout[3] = '{32, 32, 10};
    int mw  [3] = '{28, 28, 9};
    for (int t = 0; t < T; t++) exp_ev.push_back($sformatf("I last%0d", t == T - 1));
    for (int l = 0; l < 3; l++)
      for (int g = 0; g < (cout[l] + P - 1) / P; g++)
        for (int t = 0; t < T; t++) begin
          logic [7:0] act;
          for (int p = 0; p < P; p++) act[p] = (g * P + p) < cout[l];
          for (int c = 0; c < cin[l]; c++)
            exp_ev.push_back($sformatf("R l%0d g%0d seg%0d src%0d act%h w%0d", l, g, (c / P) * T + t, c % P, act, mw[l]));
          exp_ev.push_back($sformatf("T l%0d g%0d oseg%0d act%h last%0d pool%0d", l, g, g * T + t, act, t == T - 1, l == 1));
        end
    for (int c = 0; c < 10; c++)
      for (int t = 0; t < T; t++) exp_ev.push_back($sformatf("C c%0d seg%0d src%0d", c, (c / P) * T + t, c % P));
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    while (n_pix < 784) begin
      in_valid = ($urandom % 4 != 0);
      @(negedge clk);
    end
    in_valid = 0;
    while (n_done == 0) @(negedge clk);
    chk(exp_ev.size() == 0, $sformatf("%0d scheduled steps never happened", exp_ev.size()));
    chk(n_newl == 4, $sformatf("%0d layer switches", n_newl));
    chk(n_pix == 784, "784 pixels");
    repeat (5) @(negedge clk);
    chk(n_done == 1, "done once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
