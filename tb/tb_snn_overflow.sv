// tb_snn_overflow: the accelerator with event queues far too short for the
// network (40 words per queue instead of 750).  One image with many spikes is
// run; the inference must still end with result_valid (dropped events never
// stall the schedule) and the overflow flag must be set, then cleared again
// by the next start.  A second run with an all-dark image (no spikes at all)
// must finish without overflow.
`timescale 1ns/1ps
module tb_snn_overflow;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, in_valid = 0, in_ready, result_valid, busy, overflow;
  logic [7:0] in_pixel = '0;
  logic [3:0] result_class;
  logic [31:0] sat_events;
  int n_ovf = 0;

  snn_top #(.AEQ_D(40)) dut (.*);

  initial begin
    #100000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input bit bright);
    @(posedge clk);
    start <= 1;
    @(posedge clk);
    start <= 0;
    for (int y = 0; y < 28; y++)
      for (int x = 0; x < 28; x++) begin
        in_valid <= 1;
        in_pixel <= bright ? 8'(((x * 7 + y * 3) % 5 < 3) ? 220 : 40) : 8'd5;
        do @(posedge clk); while (!in_ready);
      end
    in_valid <= 0;
    while (!result_valid) @(posedge clk);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(1);
    checks++;
    if (!overflow) begin failures++; $display("overflow not flagged"); end
    else n_ovf++;
    run(0);
    checks++;
    if (overflow) begin failures++; $display("overflow flagged for a dark image"); end
    $display("overflow runs: %0d", n_ovf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
