// tb_ae_codec: exhaustive check of the compressed address-event encoding.
// For every neuron of a 28x28 map the queue index must be 3*(y%3) + x%3 and
// the word {y/3, x/3} (4 + 4 bits); decoding must give (x, y) back and must
// not flag a marker, while the end-of-segment word must be flagged.  Also
// checks that the 28x28 map needs 8-bit events (6 free codes per coordinate).
`timescale 1ns/1ps
module tb_ae_codec;
  import snn_pkg::*;
  int checks = 0, failures = 0;

  xy_t ex, ey, dx, dy;
  qidx_t eq, dq;
  ae_word_t ew, dw, mw;
  logic dm;

  ae_codec dut (.enc_x(ex), .enc_y(ey), .enc_q(eq), .enc_word(ew),
                .dec_q(dq), .dec_word(dw), .dec_x(dx), .dec_y(dy), .dec_marker(dm),
                .marker_word(mw));

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    chk(AE_W == 8, "event width 8");
    chk((1 << CW) - NWIN == 6, "six unused codes");
    for (int y = 0; y < 28; y++)
      for (int x = 0; x < 28; x++) begin
        ex = xy_t'(x); ey = xy_t'(y);
        #1;
        chk(int'(eq) == 3 * (y % 3) + x % 3, $sformatf("queue of (%0d,%0d)", x, y));
        chk(int'(ew) == (y / 3) * 16 + x / 3, $sformatf("word of (%0d,%0d) = %h", x, y, ew));
        dq = eq; dw = ew;
        #1;
        chk(int'(dx) == x && int'(dy) == y && !dm, $sformatf("decode (%0d,%0d)", x, y));
      end
    dw = mw; dq = 0;
    #1;
    chk(dm == 1'b1, "marker detected");
    chk(int'(mw[3:0]) == 15, "marker uses the free code 15");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
