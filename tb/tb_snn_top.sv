// tb_snn_top: end-to-end test of the accelerator at its default size
// (P = 8 cores, AEQ depth 750, T = 4, MNIST network 32C3-32C3-P3-10C3-10).
//
// Several synthetic 28x28 images are streamed in.  An independent reference
// model in this file evaluates the same spiking network: 'same'-padded
// convolutions with saturating 8-bit potentials, bias and threshold once per
// time step without reset, 3x3 OR-pooling, and the dense output layer.  It
// replays spikes in the order the hardware queues deliver them (queue index
// first, then window order), so saturation happens identically.  Checked per
// image: the class, that no queue overflowed, that the number of saturated
// convolution updates equals the model's, and the cycle count against the
// schedule (N + 2 cycles per segment of N events, WW*WW + 2 per thresholding
// pass, plus fixed overheads).  Mechanisms counted: saturation, pooling,
// idle cores (a partial last channel group), empty segments.
`timescale 1ns/1ps
module tb_snn_top;
  import snn_pkg::*;

  localparam int P = 8, T = 4, VT = 24, D = 750, NIMG = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, in_valid = 0, in_ready, result_valid, busy, overflow;
  logic [7:0] in_pixel = '0;
  logic [3:0] result_class;
  logic [31:0] sat_events;

  snn_top dut (
    .clk, .rst_n, .start, .in_valid, .in_ready, .in_pixel,
    .result_valid, .result_class, .busy, .overflow, .sat_events
  );

  int checks = 0, failures = 0;
  int n_sat_img = 0, n_pool = 0, n_idle = 0, n_empty = 0;

  // ------------------------------------------------------------ weights
  function automatic int kw(int l, int co, int c, int k);
    return ((29 * l + 7 * co + 13 * c + 5 * k + 3 * co * c) % 16) - 6;
  endfunction
  function automatic int kb(int l, int co);
    return ((5 * co + 3 * l) % 7) - 3;
  endfunction
  function automatic int dw(int k, int c, int y, int x);
    return ((17 * k + 11 * c + 5 * y + 3 * x + k * c) % 13) - 6;
  endfunction

  function automatic int sat8(int v, ref int nsat);
    if (v > 127)  begin nsat++; return 127;  end
    if (v < -128) begin nsat++; return -128; end
    return v;
  endfunction

  // spike lists: ev[c][t] holds x*64+y in hardware read order
  typedef int evlist_t[$];
  evlist_t cur [32][T];
  evlist_t nxt [32][T];

  int pix [28][28];
  int V [28][28];
  int exp_sat;
  int exp_cycles;

  // Turn a spike map into the read order of the queues.
  task automatic emit(input bit sp [28][28], input int w, input int pooled, input int co, input int t);
    int q, wwin, cnt, qn;
    evlist_t l;
    wwin = (w + 2) / 3;
    cnt = 0;
    for (q = 0; q < 9; q++)
      for (int j = 0; j < wwin; j++)
        for (int i = 0; i < wwin; i++) begin
          if (pooled) begin
            int px, py;
            bit any;
            px = i; py = j;
            if (px >= w / 3 || py >= w / 3) continue;
            any = 0;
            for (int m = 0; m < 9; m++) if (sp[3*j + m/3][3*i + m%3]) any = 1;
            qn = 3 * (py % 3) + (px % 3);
            if (any && qn == q) begin l.push_back(px * 64 + py); cnt++; end
          end else begin
            int x, y;
            x = 3 * i + q % 3; y = 3 * j + q / 3;
            if (x < w && y < w && sp[y][x]) begin l.push_back(x * 64 + y); cnt++; end
          end
        end
    nxt[co][t] = l;
    if (cnt == 0) n_empty++;
  endtask

  task automatic reference(output int cls);
    bit sp [28][28];
    int nsat_dummy;
    int cin, cout, w, pool, wwin, wo;
    int acc [10];
    exp_sat = 0;
    nsat_dummy = 0;
    exp_cycles = 0;
    // input layer: potentials pixel/2, zero bias
    for (int t = 0; t < T; t++) begin
      for (int y = 0; y < 28; y++) for (int x = 0; x < 28; x++) sp[y][x] = (pix[y][x] / 2) > VT;
      emit(sp, 28, 0, 0, t);
      exp_cycles += 103;
    end
    cur = nxt;
    for (int l = 0; l < 3; l++) begin
      cin  = (l == 0) ? 1 : 32;
      cout = (l == 2) ? 10 : 32;
      w    = (l == 2) ? 9 : 28;
      pool = (l == 1);
      wwin = (w + 2) / 3;
      if (cout % P != 0) n_idle++;
      for (int co = 0; co < cout; co++) begin
        for (int y = 0; y < 28; y++) for (int x = 0; x < 28; x++) V[y][x] = 0;
        for (int t = 0; t < T; t++) begin
          for (int c = 0; c < cin; c++) begin
            foreach (cur[c][t][e]) begin
              int x, y, nev;
              x = cur[c][t][e] / 64; y = cur[c][t][e] % 64;
              nev = 0;
              for (int ky = 0; ky < 3; ky++) for (int kx = 0; kx < 3; kx++) begin
                int ox, oy;
                ox = x + 1 - kx; oy = y + 1 - ky;
                if (ox < 0 || oy < 0 || ox >= w || oy >= w) continue;
                V[oy][ox] = sat8(V[oy][ox] + kw(l, co, c, 3 * ky + kx), nev);
              end
              if (nev != 0) exp_sat++;
            end
          end
          for (int y = 0; y < w; y++) for (int x = 0; x < w; x++) begin
            V[y][x] = sat8(V[y][x] + kb(l, co), nsat_dummy);
            sp[y][x] = V[y][x] > VT;
          end
          emit(sp, w, pool, co, t);
        end
      end
      // cycle estimate: per group and time step, segments and thresholding
      for (int g = 0; g < (cout + P - 1) / P; g++)
        for (int t = 0; t < T; t++) begin
          for (int c = 0; c < cin; c++) exp_cycles += cur[c][t].size() + 2;
          exp_cycles += wwin * wwin + 4;
        end
      if (pool) for (int co = 0; co < cout; co++) for (int t = 0; t < T; t++) n_pool += nxt[co][t].size();
      cur = nxt;
    end
    for (int k = 0; k < 10; k++) acc[k] = 0;
    for (int c = 0; c < 10; c++)
      for (int t = 0; t < T; t++) begin
        foreach (cur[c][t][e]) begin
          int x, y;
          x = cur[c][t][e] / 64; y = cur[c][t][e] % 64;
          for (int k = 0; k < 10; k++) acc[k] += dw(k, c, y, x);
        end
        exp_cycles += cur[c][t].size() + 2;
      end
    cls = 0;
    for (int k = 0; k < 10; k++) acc[k] += T * ((k % 3) - 1);
    for (int k = 1; k < 10; k++) if (acc[k] > acc[cls]) cls = k;
  endtask

  task automatic gen_image(input int n);
    for (int y = 0; y < 28; y++)
      for (int x = 0; x < 28; x++) begin
        int dx, dy, r2;
        dx = x - 14 + (n - 1) * 3; dy = y - 14;
        r2 = dx * dx + dy * dy;
        case (n % 3)
          0: pix[y][x] = (r2 > 30 && r2 < 90) ? 200 : 20;                 // ring
          1: pix[y][x] = (dx > -3 && dx < 3 && dy > -11 && dy < 11) ? 230 : 10; // bar
          default: pix[y][x] = ((x + 2 * y) % 7 < 2 && r2 < 120) ? 180 : 30;  // strokes
        endcase
      end
  endtask

  int cyc;
  always @(posedge clk) cyc++;

  initial begin
    #1000000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cls_exp, t0, t1, nsat0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < NIMG; n++) begin
      gen_image(n);
      reference(cls_exp);
      @(posedge clk);
      start <= 1;
      t0 = cyc;
      @(posedge clk);
      start <= 0;
      for (int y = 0; y < 28; y++)
        for (int x = 0; x < 28; x++) begin
          in_valid <= 1;
          in_pixel <= 8'(pix[y][x]);
          do @(posedge clk); while (!in_ready);
        end
      in_valid <= 0;
      while (!result_valid) @(posedge clk);
      t1 = cyc;
      checks++;
      if (result_class !== 4'(cls_exp)) begin
        failures++;
        $display("image %0d: class %0d, expected %0d", n, result_class, cls_exp);
      end
      checks++;
      if (overflow) begin failures++; $display("image %0d: queue overflow", n); end
      checks++;
      // one count per (event, output channel) with any clipped neighbour
      if (sat_events != 32'(exp_sat)) begin
        failures++; $display("image %0d: %0d saturating updates, model %0d", n, sat_events, exp_sat);
      end
      if (sat_events != 0) n_sat_img++;
      checks++;
      // 784 load cycles and start / clear overheads on top of the schedule
      if ((t1 - t0) < exp_cycles || (t1 - t0) > exp_cycles + 784 + MEM_D + 64) begin
        failures++;
        $display("image %0d: %0d cycles, schedule %0d", n, t1 - t0, exp_cycles);
      end
      $display("image %0d: class %0d (model %0d), %0d cycles (schedule %0d + load), sat %0d/%0d",
               n, result_class, cls_exp, t1 - t0, exp_cycles, sat_events, exp_sat);
      repeat (5) @(posedge clk);
    end
    // every mechanism must have happened
    checks++; if (n_sat_img == 0) begin failures++; $display("saturation never happened"); end
    checks++; if (n_pool == 0)    begin failures++; $display("pooling never produced a spike"); end
    checks++; if (n_idle == 0)    begin failures++; $display("no idle core group"); end
    checks++; if (n_empty == 0)   begin failures++; $display("no empty segment"); end
    $display("mechanisms: saturating images %0d, pooled spikes %0d, partial groups %0d, empty segments %0d",
             n_sat_img, n_pool, n_idle, n_empty);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
