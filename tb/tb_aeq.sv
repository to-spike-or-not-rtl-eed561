// tb_aeq: address event queue with small parameters (D = 32 words per queue,
// 4 segments).  Writes two layers of random segments (events spread over the
// nine queues, several queues written in the same cycle), turns layers with
// new_layer and replays every segment of the previous layer in random order,
// twice.  Checked: the replayed events and their order (all of queue 0, then
// queue 1, ...), the timing (N events in the N cycles after rd_start, rd_done
// in cycle N + 1), an empty segment, that overflow stays low while the queues
// have room, and that it is raised (and write data of other queues is kept)
// once a queue is filled beyond its depth.
`timescale 1ns/1ps
module tb_aeq;
  import snn_pkg::*;
  localparam int D = 32, MS = 4;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic clear = 0, new_layer = 0, seg_open = 0, seg_close = 0, rd_start = 0;
  logic [1:0] wr_seg = 0, rd_seg = 0;
  logic [NQ-1:0] wr_en = 0;
  ae_word_t wr_data [NQ];
  logic rd_valid, rd_done, rd_busy, overflow;
  qidx_t rd_q;
  ae_word_t rd_word;

  aeq #(.D(D), .MAX_SEG(MS)) dut (.*);

  typedef int list_t[$];
  list_t ref_seg [MS];       // expected read order, q*256 + word

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  task automatic step();
    @(posedge clk); #1;
  endtask

  // write one segment with n[q] events in queue q
  task automatic write_seg(input int s, input int n [NQ], output list_t l);
    int left [NQ];
    list_t perq [NQ];
    left = n;
    seg_open = 1; wr_seg = 2'(s);
    step();
    seg_open = 0;
    while (1) begin
      bit any;
      any = 0;
      for (int q = 0; q < NQ; q++) begin
        wr_en[q] = (left[q] > 0) && ($urandom % 3 != 0);
        wr_data[q] = ae_word_t'(($urandom % 10) * 16 + $urandom % 10);
        if (wr_en[q]) begin
          left[q]--;
          perq[q].push_back(q * 256 + int'(wr_data[q]));
        end
        if (left[q] > 0) any = 1;
      end
      step();
      wr_en = '0;
      if (!any) break;
    end
    seg_close = 1;
    step();
    seg_close = 0;
    l = {};
    for (int q = 0; q < NQ; q++) foreach (perq[q][k]) l.push_back(perq[q][k]);
  endtask

  task automatic replay(input int s);
    list_t got;
    int cyc;
    rd_start = 1; rd_seg = 2'(s);
    step();
    rd_start = 0;
    cyc = 1;
    while (!rd_done && cyc < 200) begin
      if (rd_valid) got.push_back(int'(rd_q) * 256 + int'(rd_word));
      step();
      cyc++;
    end
    chk(got == ref_seg[s], $sformatf("segment %0d: %0d events read, %0d written", s, got.size(), ref_seg[s].size()));
    chk(cyc == ref_seg[s].size() + 1, $sformatf("segment %0d: done in cycle %0d for %0d events", s, cyc, ref_seg[s].size()));
    step();
  endtask

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n [NQ];
    list_t nxt [MS];
    for (int q = 0; q < NQ; q++) wr_data[q] = '0;
    repeat (2) step();
    rst_n = 1;
    clear = 1; step(); clear = 0;
    // layer A: segment 2 stays empty
    for (int s = 0; s < MS; s++) begin
      for (int q = 0; q < NQ; q++) n[q] = (s == 2) ? 0 : int'($urandom % 4);
      write_seg(s, n, ref_seg[s]);
    end
    new_layer = 1; step(); new_layer = 0;
    for (int r = 0; r < 2; r++)
      for (int k = 0; k < MS; k++) replay((k * 3 + r) % MS);
    // layer B written while layer A is still readable
    for (int s = 0; s < MS; s++) begin
      for (int q = 0; q < NQ; q++) n[q] = int'($urandom % 3);
      write_seg(s, n, nxt[s]);
    end
    for (int k = 0; k < MS; k++) replay(MS - 1 - k);   // still layer A
    new_layer = 1; step(); new_layer = 0;
    ref_seg = nxt;
    for (int k = 0; k < MS; k++) replay(k);
    chk(!overflow, "no overflow while the queues have room");
    // layer C overfills queue 4: D-1 usable words minus layer B's words
    for (int q = 0; q < NQ; q++) n[q] = (q == 4) ? D : 0;
    write_seg(0, n, nxt[0]);
    chk(overflow, "overflow raised");
    for (int k = 0; k < MS; k++) replay(k);            // layer B intact
    clear = 1; step(); clear = 0;
    chk(!overflow, "clear resets overflow");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
