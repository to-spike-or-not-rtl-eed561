// tb_snn_pe: one core (core 0 of 8) through a small layer sequence, with its
// queue output looped back to its own event input as the top level does.
//   1. clear, load a 28x28 image (potential = pixel/2) into the membrane memory
//   2. threshold it as the input layer (zero bias, last step) -> segment 0
//   3. new_layer, replay segment 0: the input spikes are checked and fed to
//      the convolution unit (layer 0, output channel 0)
//   4. threshold with the channel's bias -> segment 0 of the next layer
//   5. new_layer, replay it: the output spikes are checked
// A reference computes pixel thresholding, the convolution with the ROM
// formula, saturation and the read order.  Also checked: sat pulses, the
// replay length (N + 1 cycles), no overflow.
`timescale 1ns/1ps
module tb_snn_pe;
  import snn_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic clear = 0, pool = 0, thr_start = 0, thr_input = 0, last_t = 0, ld_we = 0;
  logic new_layer = 0, rd_start = 0, loop_en = 0;
  logic [1:0] layer = 0;
  logic [CH_W-1:0] group = 0, ci = 0;
  logic [4:0] map_w = 28;
  logic [CW-1:0] win_w = 10;
  xy_t ld_x = 0, ld_y = 0;
  logic [7:0] ld_pix = 0;
  logic [3:0] out_seg = 0, rd_seg = 0;
  logic rd_valid, rd_done, busy, thr_done, overflow, sat;
  qidx_t rd_q;
  ae_word_t rd_word;

  snn_pe #(.P(8), .PE_ID(0), .AEQ_D(750), .T_STEPS(4)) dut (
    .clk, .rst_n, .clear, .layer, .group, .map_w, .win_w, .pool, .v_t(vmem_t'(24)),
    .ci, .ev_valid(rd_valid && loop_en), .ev_q(rd_q), .ev_word(rd_word),
    .thr_start, .thr_input, .last_t, .out_seg,
    .ld_we, .ld_x, .ld_y, .ld_pix,
    .new_layer, .rd_start, .rd_seg, .rd_valid, .rd_q, .rd_word, .rd_done,
    .busy, .thr_done, .overflow, .sat
  );

  function automatic int kw(int l, int co, int c, int k);
    return ((29 * l + 7 * co + 13 * c + 5 * k + 3 * co * c) % 16) - 6;
  endfunction

  typedef int list_t[$];
  int nsat_hw = 0;
  always @(posedge clk) if (sat) nsat_hw++;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  function automatic list_t order(input bit sp [28][28]);
    list_t l;
    for (int q = 0; q < 9; q++) for (int j = 0; j < 10; j++) for (int i = 0; i < 10; i++) begin
      int x, y;
      x = 3 * i + q % 3; y = 3 * j + q / 3;
      if (x < 28 && y < 28 && sp[y][x]) l.push_back(q * 256 + j * 16 + i);
    end
    return l;
  endfunction

  task automatic replay(output list_t got, output int cyc);
    @(negedge clk);
    rd_start = 1; rd_seg = 0;
    @(negedge clk);
    rd_start = 0;
    cyc = 1;
    got = {};
    while (!rd_done && cyc < 2000) begin
      if (rd_valid) got.push_back(int'(rd_q) * 256 + int'(rd_word));
      @(negedge clk);
      cyc++;
    end
    @(negedge clk);
  endtask

  task automatic thresh(input bit inp, input bit lt);
    @(negedge clk);
    thr_input = inp; last_t = lt; thr_start = 1;
    @(negedge clk);
    thr_start = 0;
    while (!thr_done) @(negedge clk);
    @(negedge clk);
  endtask

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int pix [28][28], V [28][28];
    bit sp_in [28][28], sp_out [28][28];
    list_t e_in, e_out, got;
    int cyc, nsat, b;
    for (int y = 0; y < 28; y++) for (int x = 0; x < 28; x++) begin
      pix[y][x] = ((x - 13) * (x - 13) + (y - 14) * (y - 14) < 60) ? 150 + int'($urandom % 100) : int'($urandom % 60);
      sp_in[y][x] = pix[y][x] / 2 > 24;
      V[y][x] = 0;
    end
    // reference convolution in replay order
    e_in = order(sp_in);
    nsat = 0;
    foreach (e_in[e]) begin
      int x, y, q, nev;
      q = e_in[e] / 256; x = 3 * (e_in[e] % 16) + q % 3; y = 3 * ((e_in[e] / 16) % 16) + q / 3;
      nev = 0;
      for (int ky = 0; ky < 3; ky++) for (int kx = 0; kx < 3; kx++) begin
        int ox, oy, v;
        ox = x + 1 - kx; oy = y + 1 - ky;
        if (ox < 0 || oy < 0 || ox >= 28 || oy >= 28) continue;
        v = V[oy][ox] + kw(2, 8, 23, 3 * ky + kx);
        if (v > 127) begin v = 127; nev++; end
        if (v < -128) begin v = -128; nev++; end
        V[oy][ox] = v;
      end
      if (nev) nsat++;
    end
    b = ((5 * 8 + 3 * 2) % 7) - 3;
    for (int y = 0; y < 28; y++) for (int x = 0; x < 28; x++) begin
      int v;
      v = V[y][x] + b;
      if (v > 127) v = 127;
      if (v < -128) v = -128;
      sp_out[y][x] = v > 24;
    end
    e_out = order(sp_out);

    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    clear = 1;
    @(negedge clk);
    clear = 0;
    while (busy) @(negedge clk);
    for (int y = 0; y < 28; y++) for (int x = 0; x < 28; x++) begin
      ld_we = 1; ld_x = xy_t'(x); ld_y = xy_t'(y); ld_pix = 8'(pix[y][x]);
      @(negedge clk);
    end
    ld_we = 0;
    thresh(1, 1);
    @(negedge clk); new_layer = 1; @(negedge clk); new_layer = 0;
    layer = 2; group = 1; ci = 23;                  // output channel 8, input channel 23
    loop_en = 1;
    replay(got, cyc);
    loop_en = 0;
    chk(got == e_in, $sformatf("input spikes: %0d read, %0d expected", got.size(), e_in.size()));
    chk(cyc == e_in.size() + 1, $sformatf("replay of %0d events took %0d cycles", e_in.size(), cyc));
    while (busy) @(negedge clk);
    chk(nsat_hw == nsat, $sformatf("saturating spikes %0d, expected %0d", nsat_hw, nsat));
    thresh(0, 0);
    @(negedge clk); new_layer = 1; @(negedge clk); new_layer = 0;
    replay(got, cyc);
    chk(got == e_out, $sformatf("output spikes: %0d read, %0d expected", got.size(), e_out.size()));
    chk(e_out.size() > 0 && e_in.size() > 0, "both layers spike");
    chk(!overflow, "no overflow");
    $display("input spikes %0d, output spikes %0d, saturating %0d", e_in.size(), e_out.size(), nsat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
