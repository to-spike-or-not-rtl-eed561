// tb_conv_unit: convolution unit against a 2-D reference.  A simple
// interlaced membrane memory (nine arrays, combinational read) sits in the
// testbench.  Random spikes, one per cycle with random gaps, and a random
// kernel per spike are fed for a 28x28 and a 9x9 map; every spike adds
// w[1+y-oy][1+x-ox] to the neurons (ox, oy) around it, clipped to the map
// ('same' padding) and saturated to 8 bits.  Checked: every potential after
// the run, the number of spikes that saturated (sat output), and that busy
// falls one cycle after the last event.
`timescale 1ns/1ps
module tb_conv_unit;
  import snn_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic ev_valid = 0;
  qidx_t ev_q = 0;
  ae_word_t ev_word = 0;
  logic [4:0] map_w = 28;
  logic [CW-1:0] win_w = 10;
  weight_t w [NQ];
  maddr_t raddr [NQ], waddr [NQ];
  vmem_t rdata [NQ], wdata [NQ];
  logic [NQ-1:0] we;
  logic busy, sat;

  conv_unit dut (.*);

  vmem_t mem [NQ][256];
  always_comb for (int m = 0; m < NQ; m++) rdata[m] = mem[m][raddr[m]];
  always_ff @(posedge clk) for (int m = 0; m < NQ; m++) if (we[m]) mem[m][waddr[m]] <= wdata[m];

  int nsat_hw = 0;
  always @(posedge clk) if (sat) nsat_hw++;

  int V [28][28];

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int nsat_ref, mw, ww;
    logic lastv;
    for (int m = 0; m < NQ; m++) w[m] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int pass = 0; pass < 2; pass++) begin
      mw = pass ? 9 : 28;
      ww = (mw + 2) / 3;
      @(negedge clk);
      map_w = 5'(mw); win_w = CW'(ww);
      for (int m = 0; m < NQ; m++) for (int a = 0; a < 256; a++) mem[m][a] = 0;
      for (int y = 0; y < 28; y++) for (int x = 0; x < 28; x++) V[y][x] = 0;
      nsat_ref = 0; nsat_hw = 0;
      for (int e = 0; e < 600; e++) begin
        int x, y, nev;
        x = $urandom % mw; y = $urandom % mw;
        @(negedge clk);
        ev_valid = ($urandom % 4 != 0);
        ev_q = qidx_t'(3 * (y % 3) + x % 3);
        ev_word = ae_word_t'((y / 3) * 16 + x / 3);
        for (int k = 0; k < NQ; k++) w[k] = weight_t'(int'($urandom % 61) - 25);
        lastv = ev_valid;
        if (!ev_valid) continue;
        nev = 0;
        for (int ky = 0; ky < 3; ky++) for (int kx = 0; kx < 3; kx++) begin
          int ox, oy, v;
          ox = x + 1 - kx; oy = y + 1 - ky;
          if (ox < 0 || oy < 0 || ox >= mw || oy >= mw) continue;
          v = V[oy][ox] + int'(w[3 * ky + kx]);
          if (v > 127) begin v = 127; nev++; end
          if (v < -128) begin v = -128; nev++; end
          V[oy][ox] = v;
        end
        if (nev != 0) nsat_ref++;
      end
      @(negedge clk);
      ev_valid = 0;
      checks++;
      if (busy != lastv) begin failures++; $display("busy %0d after an event with valid %0d", busy, lastv); end
      @(negedge clk);
      checks++;
      if (busy) begin failures++; $display("busy still high"); end
      for (int y = 0; y < mw; y++) for (int x = 0; x < mw; x++) begin
        int m, a;
        m = 3 * (y % 3) + x % 3; a = (y / 3) * ww + x / 3;
        checks++;
        if (int'(mem[m][a]) != V[y][x]) begin
          failures++;
          if (failures < 10) $display("map %0d (%0d,%0d): %0d expected %0d", mw, x, y, mem[m][a], V[y][x]);
        end
      end
      checks++;
      if (nsat_hw != nsat_ref || nsat_ref == 0) begin
        failures++; $display("saturating spikes %0d, expected %0d", nsat_hw, nsat_ref);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
