// conv_unit: event-driven convolution of one core.
//
// For every incoming address event (input spike) the unit adds the KxK kernel
// of the current (output channel, input channel) pair to the membrane
// potentials of the KxK output neighbourhood of the spike, Eq. (1) of the
// IF model without any multiplication.  With 'same' padding, a spike at input
// (x, y) reaches output neuron (x+1-kx, y+1-ky) through weight w[ky][kx];
// neighbours outside the WxW map are skipped.  Thanks to the interlaced
// membrane memory every neighbour sits in a different memory, so all nine
// read-modify-writes happen in the same cycle.
//
// Pipeline (one event per cycle, two cycles latency):
//   stage 1: decode the event, work out for every memory the neighbour it
//            holds, its address, whether it is inside the map and its weight;
//   stage 2: read the nine potentials, add the weights (saturating at the
//            VW-bit range; sat pulses when any sum clipped) and write back.
// Back-to-back events never conflict: a write lands at the clock edge and the
// combinational read of the next event already sees it.
//
// The paper gives the function (one spike per cycle per core, multiplier-less
// accumulation over the kernel neighbourhood); the pipeline split and the
// saturation are this design's choices.
module conv_unit
  import snn_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  // event input
  input  logic          ev_valid,
  input  qidx_t         ev_q,
  input  ae_word_t      ev_word,
  input  logic [4:0]    map_w,        // feature-map width W
  input  logic [CW-1:0] win_w,        // windows per row, ceil(W/K)
  input  weight_t       w [NQ],       // kernel, valid while ev_valid
  // membrane memory port (bank chosen outside)
  output maddr_t        raddr [NQ],
  input  vmem_t         rdata [NQ],
  output logic [NQ-1:0] we,
  output maddr_t        waddr [NQ],
  output vmem_t         wdata [NQ],
  // status
  output logic          busy,
  output logic          sat
);

  xy_t x, y;
  ae_codec u_dec (
    .enc_x('0), .enc_y('0), .enc_q(), .enc_word(),
    .dec_q(ev_q), .dec_word(ev_word), .dec_x(x), .dec_y(y), .dec_marker(),
    .marker_word()
  );

  // ---------------------------------------------------------------- stage 1
  logic [NQ-1:0] n_in;
  maddr_t        n_addr [NQ];
  weight_t       n_w [NQ];

  always_comb begin
    for (int m = 0; m < NQ; m++) begin
      int qx, qy, dx, dy, ox, oy;
      qx = int'(ev_q) % K;
      qy = int'(ev_q) / K;
      dx = ((m % K) - qx + 1 + K) % K;        // neighbour offset + 1 in 0..K-1
      dy = ((m / K) - qy + 1 + K) % K;
      ox = int'(x) - 1 + dx;
      oy = int'(y) - 1 + dy;
      n_in[m]   = (ox >= 0) && (oy >= 0) && (ox < int'(map_w)) && (oy < int'(map_w));
      n_addr[m] = maddr_t'(((oy + K) / K - 1) * int'(win_w) + (ox + K) / K - 1);
      n_w[m]    = w[(K - 1 - dy) * K + (K - 1 - dx)];
    end
  end

  logic          s1_valid;
  logic [NQ-1:0] s1_in;
  maddr_t        s1_addr [NQ];
  weight_t       s1_w [NQ];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) s1_valid <= 1'b0;
    else        s1_valid <= ev_valid;
  end

  always_ff @(posedge clk) begin
    if (ev_valid) begin
      s1_in <= n_in;
      for (int m = 0; m < NQ; m++) begin
        s1_addr[m] <= n_addr[m];
        s1_w[m]    <= n_w[m];
      end
    end
  end

  // ---------------------------------------------------------------- stage 2
  logic [NQ-1:0] m_sat;
  always_comb begin
    for (int m = 0; m < NQ; m++) begin
      raddr[m] = s1_addr[m];
      waddr[m] = s1_addr[m];
      we[m]    = s1_valid && s1_in[m];
    end
  end

  // kept apart from the address logic: the read data depends on raddr
  always_comb begin
    for (int m = 0; m < NQ; m++)
      wdata[m] = sat_add(rdata[m], s1_w[m], m_sat[m]);
  end

  assign busy = s1_valid;
  assign sat  = |(m_sat & we);

endmodule
