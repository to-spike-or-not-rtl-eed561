// tb_mempot: membrane memory.  Checks the clear sequence (both banks zero
// after DEPTH cycles), independent banks, nine parallel writes and reads at
// different addresses, and that a write is visible to the combinational read
// in the next cycle.  A shadow array is the reference.
`timescale 1ns/1ps
module tb_mempot;
  import snn_pkg::*;
  localparam int DEPTH = 256;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic clr_start = 0, clr_busy, rbank = 0, wbank = 0;
  logic [7:0] raddr [NQ], waddr [NQ];
  vmem_t rdata [NQ], wdata [NQ];
  logic [NQ-1:0] we = '0;
  int shadow [2][NQ][DEPTH];

  mempot #(.DEPTH(DEPTH)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc;
    for (int m = 0; m < NQ; m++) begin raddr[m] = 0; waddr[m] = 0; wdata[m] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    clr_start = 1;
    @(posedge clk); #1;
    clr_start = 0;
    cyc = 0;
    while (clr_busy) begin @(posedge clk); #1; cyc++; end
    checks++;
    if (cyc != DEPTH) begin failures++; $display("clear took %0d cycles", cyc); end
    for (int b = 0; b < 2; b++) for (int m = 0; m < NQ; m++) for (int a = 0; a < DEPTH; a++) shadow[b][m][a] = 0;
    // random traffic
    for (int it = 0; it < 2000; it++) begin
      for (int m = 0; m < NQ; m++) begin
        we[m]    <= ($urandom % 2) == 1;
        waddr[m] <= 8'($urandom % DEPTH);
        wdata[m] <= vmem_t'($urandom);
        raddr[m] <= 8'($urandom % DEPTH);
      end
      wbank <= ($urandom % 2) == 1;
      rbank <= ($urandom % 2) == 1;
      @(posedge clk);
      #1;
      // the write of this edge is already visible to the combinational read
      for (int m = 0; m < NQ; m++) if (we[m]) shadow[wbank][m][waddr[m]] = int'(wdata[m]);
      for (int m = 0; m < NQ; m++) begin
        checks++;
        if (int'(rdata[m]) != shadow[rbank][m][raddr[m]]) begin
          failures++;
          if (failures < 10) $display("mem %0d bank %0d addr %0d: %0d expected %0d", m, rbank, raddr[m], rdata[m], shadow[rbank][m][raddr[m]]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
