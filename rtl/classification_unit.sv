// classification_unit: fully connected output layer and class decision.
//
// The last convolution layer leaves its spikes in the address event queues.
// This unit is fed those events, one per cycle, together with the channel c
// of the segment being read.  Each event (x, y, c) adds the dense weight
// W[k][(y*FC_W + x)*FC_CIN + c] (channel-last flattening) to all N_CLASS
// output accumulators in parallel, again without multipliers.  On finish the
// accumulators receive T_STEPS times their bias (one bias per time step) and
// the class with the largest value (lowest index on a tie) is output.
//
// Timing: the weight ROMs are read synchronously, so an event reaches the
// accumulators two cycles after it is presented; finish must come at least
// two cycles after the last event.  result_valid rises the cycle after finish
// and stays until start.
//
// The paper only names a Classification Unit fed from the AEQ and lists the
// final dense layer of 10 neurons; the accumulate-and-argmax scheme, the
// 16-bit accumulators and the stand-in weights
// w = ((17*k + 11*c + 5*y + 3*x + k*c) mod 13) - 6 and biases (k mod 3) - 1
// are this design's.
module classification_unit
  import snn_pkg::*;
#(
  parameter int unsigned T_STEPS = 4,
  parameter int unsigned ACC_W   = 16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic                    ev_valid,
  input  qidx_t                   ev_q,
  input  ae_word_t                ev_word,
  input  logic [CH_W-1:0]         ev_ch,
  input  logic                    finish,
  output logic                    result_valid,
  output logic [3:0]              result_class,
  output logic signed [ACC_W-1:0] score [N_CLASS]
);

  localparam int unsigned NIN = FC_CIN * FC_W * FC_W;
  localparam int unsigned IW  = $clog2(NIN);

  function automatic weight_t dense_init(input int unsigned k, input int unsigned idx);
    int unsigned c, x, y;
    c = idx % FC_CIN;
    x = (idx / FC_CIN) % FC_W;
    y = idx / (FC_CIN * FC_W);
    return weight_t'(int'((17 * k + 11 * c + 5 * y + 3 * x + k * c) % 13) - 6);
  endfunction

  function automatic weight_t dense_bias(input int unsigned k);
    return weight_t'(int'(k % 3) - 1);
  endfunction

  weight_t rom [N_CLASS][NIN];
  initial begin
    for (int unsigned k = 0; k < N_CLASS; k++)
      for (int unsigned n = 0; n < NIN; n++)
        rom[k][n] = dense_init(k, n);
  end

  xy_t x, y;
  ae_codec u_dec (
    .enc_x('0), .enc_y('0), .enc_q(), .enc_word(),
    .dec_q(ev_q), .dec_word(ev_word), .dec_x(x), .dec_y(y), .dec_marker(),
    .marker_word()
  );

  logic [IW-1:0] idx;
  assign idx = IW'((int'(y) * FC_W + int'(x)) * FC_CIN + int'(ev_ch));

  logic    s1_valid;
  weight_t s1_w [N_CLASS];

  always_ff @(posedge clk) begin
    for (int k = 0; k < N_CLASS; k++) s1_w[k] <= rom[k][idx];
  end

  logic signed [ACC_W-1:0] acc [N_CLASS];
  logic signed [ACC_W-1:0] fin [N_CLASS];
  logic [3:0]              best;

  always_comb begin
    for (int k = 0; k < N_CLASS; k++)
      fin[k] = acc[k] + ACC_W'(int'(dense_bias(k)) * int'(T_STEPS));
    best = '0;
    for (int k = 1; k < N_CLASS; k++)
      if (fin[k] > fin[best]) best = 4'(k);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid     <= 1'b0;
      result_valid <= 1'b0;
      result_class <= '0;
      for (int k = 0; k < N_CLASS; k++) begin
        acc[k]   <= '0;
        score[k] <= '0;
      end
    end else begin
      s1_valid <= ev_valid;
      if (start) begin
        result_valid <= 1'b0;
        for (int k = 0; k < N_CLASS; k++) acc[k] <= '0;
      end else if (s1_valid) begin
        for (int k = 0; k < N_CLASS; k++) acc[k] <= acc[k] + ACC_W'(s1_w[k]);
      end
      if (finish) begin
        result_valid <= 1'b1;
        result_class <= best;
        for (int k = 0; k < N_CLASS; k++) score[k] <= fin[k];
      end
    end
  end

endmodule
