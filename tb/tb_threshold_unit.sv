// tb_threshold_unit: thresholding pass against a reference.  The testbench
// holds a source bank (random potentials) and a destination bank and records
// the events written into the nine queues.  Cases: 28x28 map without pooling,
// 28x28 with 3x3 pooling, 9x9 without pooling, each with and without the last
// time step.  Checked: every written potential (V + bias saturated, or 0 in
// the last time step), that neurons outside the map are not written except
// for clearing, each event word and its queue in scan order (pooled events
// for full 3x3 windows only), one seg_open and one seg_close, and the pass
// length of WW*WW + 2 cycles.
`timescale 1ns/1ps
module tb_threshold_unit;
  import snn_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, pool = 0, last_t = 0;
  logic [4:0] map_w = 28;
  logic [CW-1:0] win_w = 10;
  weight_t bias = 0;
  vmem_t v_t = 24;
  maddr_t raddr [NQ], waddr [NQ];
  vmem_t rdata [NQ], wdata [NQ];
  logic [NQ-1:0] we, ev_we;
  ae_word_t ev_data [NQ];
  logic seg_open, seg_close, busy, done;

  threshold_unit dut (.*);

  vmem_t src [NQ][256], dst [NQ][256];
  always_comb for (int m = 0; m < NQ; m++) rdata[m] = src[m][raddr[m]];
  typedef int list_t[$];
  list_t got [NQ];
  int n_open = 0, n_close = 0;
  always_ff @(posedge clk) begin
    for (int m = 0; m < NQ; m++) begin
      if (we[m]) dst[m][waddr[m]] <= wdata[m];
      if (ev_we[m]) got[m].push_back(int'(ev_data[m]));
    end
    if (seg_open) n_open++;
    if (seg_close) n_close++;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 6; c++) begin
      int mw, ww, pl, lt, cyc, b, nsp;
      list_t expq [NQ];
      bit sp [30][30];
      mw = (c / 2 == 2) ? 9 : 28; ww = (mw + 2) / 3; pl = (c / 2 == 1); lt = c % 2;
      b = int'($urandom % 9) - 4;
      for (int m = 0; m < NQ; m++) for (int a = 0; a < 256; a++) begin
        src[m][a] = vmem_t'(int'($urandom % 80) - 30);
        if (a % 37 == 5) src[m][a] = 127;            // saturates with a positive bias
        dst[m][a] = 77;
      end
      for (int m = 0; m < NQ; m++) begin got[m] = {}; expq[m] = {}; end
      n_open = 0; n_close = 0;
      // reference spike map
      for (int y = 0; y < 30; y++) for (int x = 0; x < 30; x++) begin
        int v;
        v = int'(src[3 * (y % 3) + x % 3][(y / 3) * ww + x / 3]) + b;
        if (v > 127) v = 127;
        if (v < -128) v = -128;
        sp[y][x] = (x < mw) && (y < mw) && (v > 24);
      end
      nsp = 0;
      for (int j = 0; j < ww; j++) for (int i = 0; i < ww; i++)
        if (pl) begin
          bit any;
          any = 0;
          for (int m = 0; m < 9; m++) if (sp[3 * j + m / 3][3 * i + m % 3]) any = 1;
          if (any && i < mw / 3 && j < mw / 3) begin expq[3 * (j % 3) + i % 3].push_back((j / 3) * 16 + i / 3); nsp++; end
        end else
          for (int m = 0; m < 9; m++) if (sp[3 * j + m / 3][3 * i + m % 3]) begin expq[m].push_back(j * 16 + i); nsp++; end
      @(negedge clk);
      map_w = 5'(mw); win_w = CW'(ww); pool = pl[0]; last_t = lt[0]; bias = weight_t'(b);
      start = 1;
      @(negedge clk);
      start = 0;
      cyc = 1;
      while (!done && cyc < 500) begin @(negedge clk); cyc++; end
      chk(cyc == ww * ww + 2, $sformatf("case %0d: done in cycle %0d", c, cyc));
      @(negedge clk);
      chk(!busy, "idle after done");
      chk(n_open == 1 && n_close == 1, $sformatf("case %0d: %0d opens, %0d closes", c, n_open, n_close));
      for (int m = 0; m < NQ; m++)
        chk(got[m] == expq[m], $sformatf("case %0d queue %0d: %0d events, expected %0d", c, m, got[m].size(), expq[m].size()));
      chk(nsp > 0, $sformatf("case %0d produced spikes", c));
      for (int m = 0; m < NQ; m++) for (int a = 0; a < ww * ww; a++) begin
        int x, y, v;
        x = 3 * (a % ww) + m % 3; y = 3 * (a / ww) + m / 3;
        v = int'(src[m][a]) + b;
        if (v > 127) v = 127;
        if (v < -128) v = -128;
        if (lt) v = 0;
        else if (x >= mw || y >= mw) v = 77;
        chk(int'(dst[m][a]) == v, $sformatf("case %0d mem %0d addr %0d: %0d expected %0d", c, m, a, dst[m][a], v));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
