// threshold_unit: thresholding and spike encoding of one core.
//
// After the convolution unit has accumulated all input spikes of one time
// step into a feature map, this unit walks the map window by window.  At
// window address a = j*WW + i it reads the NQ = K*K potentials of the window
// (one from every interlaced memory, all in one cycle), adds the channel bias
// and compares with the threshold: neuron (x, y) spikes when V + b > V_t
// (Eq. (2)).  Potentials are not reset after a spike, so a neuron that stays
// above V_t spikes again in later time steps (m-TTFS).  The updated potential
// is written to the other bank, or zero after the last time step so that the
// bank starts clean for the next output channel.
//
// Spikes become address events straight away: without pooling, neuron (x, y)
// of memory m goes to AEQ queue m as word {j, i}, so up to nine events are
// written per cycle.  With pooling (KxK max pooling, which for binary spikes
// is an OR) the window (i, j) itself is the pooled neuron; windows that lie
// only partly inside the map are dropped (floor), and the pooled spike is
// encoded by the codec for the smaller map.
//
// Sequence after start: one cycle seg_open (the AEQ records where the new
// segment begins), WW*WW scan cycles, one cycle seg_close (end markers) with
// done.  Total WW*WW + 2 cycles.
//
// The paper gives the function (threshold, encode new events into the
// queues, bias from a Bias ROM); the scan order, the pooling in this unit and
// the write-back scheme are this design's.
module threshold_unit
  import snn_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [4:0]    map_w,
  input  logic [CW-1:0] win_w,
  input  logic          pool,
  input  logic          last_t,
  input  weight_t       bias,
  input  vmem_t         v_t,
  // membrane memory: read bank and write bank are chosen outside
  output maddr_t        raddr [NQ],
  input  vmem_t         rdata [NQ],
  output logic [NQ-1:0] we,
  output maddr_t        waddr [NQ],
  output vmem_t         wdata [NQ],
  // address event queue write side
  output logic          seg_open,
  output logic [NQ-1:0] ev_we,
  output ae_word_t      ev_data [NQ],
  output logic          seg_close,
  // status
  output logic          busy,
  output logic          done
);

  typedef enum logic [1:0] {S_IDLE, S_OPEN, S_SCAN, S_CLOSE} state_t;
  state_t state;
  coord_t i, j;
  maddr_t a;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      i <= '0; j <= '0; a <= '0;
    end else begin
      case (state)
        S_IDLE:  if (start) state <= S_OPEN;
        S_OPEN:  begin state <= S_SCAN; i <= '0; j <= '0; a <= '0; end
        S_SCAN: begin
          a <= a + 1'b1;
          if (i == win_w - 1'b1) begin
            i <= '0;
            j <= j + 1'b1;
            if (j == win_w - 1'b1) state <= S_CLOSE;
          end else begin
            i <= i + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign seg_open  = (state == S_OPEN);
  assign seg_close = (state == S_CLOSE);
  assign done      = (state == S_CLOSE);
  assign busy      = (state != S_IDLE);

  // pooled-event encoding
  qidx_t    pq;
  ae_word_t pword;
  ae_codec u_enc (
    .enc_x(xy_t'(i)), .enc_y(xy_t'(j)), .enc_q(pq), .enc_word(pword),
    .dec_q('0), .dec_word('0), .dec_x(), .dec_y(), .dec_marker(), .marker_word()
  );

  // the read address depends on the scan position only
  always_comb
    for (int m = 0; m < NQ; m++) raddr[m] = a;

  logic [NQ-1:0] valid, spike;
  vmem_t         vnew [NQ];
  logic          pool_win;

  always_comb begin
    for (int m = 0; m < NQ; m++) begin
      int x, y;
      logic unused_sat;
      x = int'(i) * K + m % K;
      y = int'(j) * K + m / K;
      valid[m] = (x < int'(map_w)) && (y < int'(map_w));
      waddr[m] = a;
      vnew[m]  = sat_add(rdata[m], bias, unused_sat);
      spike[m] = valid[m] && (vnew[m] > v_t);
      wdata[m] = last_t ? '0 : vnew[m];
      we[m]    = (state == S_SCAN) && (last_t || valid[m]);
    end
    pool_win = (int'(i) < int'(map_w) / K) && (int'(j) < int'(map_w) / K);
    for (int m = 0; m < NQ; m++) begin
      if (pool) begin
        ev_we[m]   = (state == S_SCAN) && pool_win && (|spike) && (pq == qidx_t'(m));
        ev_data[m] = pword;
      end else begin
        ev_we[m]   = (state == S_SCAN) && spike[m];
        ev_data[m] = ae_word_t'({j, i});
      end
    end
  end

endmodule
