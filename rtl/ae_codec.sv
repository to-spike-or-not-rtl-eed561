// ae_codec: address-event encoder and decoder (compressed coordinates).
//
// Encoding: a neuron at (x, y) goes to interlaced queue q = K*(y%K) + x%K and
// is stored there as the word {j_c, i_c} = {y/K, x/K}; the queue index itself
// carries the position inside the KxK window, so no further bits are needed.
// With W = 28 and K = 3 each coordinate takes 4 bits and values 10..15 are
// unused; the all-ones i_c code marks the end of a queue segment.  This is the
// compression of the paper's Sec. 5.2 (10-bit events with two status bits
// become 8-bit events).  If the package finds no free code value
// (COMPRESSED = 0) the word instead carries two explicit status bits on top,
// the original encoding; status 2'b01 is the segment end.
//
// Decoding reverses the mapping: x = K*i_c + q%K, y = K*j_c + q/K, and flags
// marker words.  Both directions are purely combinational.
module ae_codec
  import snn_pkg::*;
(
  // encoder
  input  xy_t      enc_x,
  input  xy_t      enc_y,
  output qidx_t    enc_q,
  output ae_word_t enc_word,
  // decoder
  input  qidx_t    dec_q,
  input  ae_word_t dec_word,
  output xy_t      dec_x,
  output xy_t      dec_y,
  output logic     dec_marker,
  // constant end-of-segment word
  output ae_word_t marker_word
);

  localparam xy_t KX = xy_t'(K);

  xy_t    xm, ym;
  coord_t ic, jc;

  always_comb begin
    xm = enc_x % KX;
    ym = enc_y % KX;
    ic = coord_t'(enc_x / KX);
    jc = coord_t'(enc_y / KX);
    enc_q = qidx_t'(ym * KX + xm);
    if (COMPRESSED) enc_word = ae_word_t'({jc, ic});
    else            enc_word = ae_word_t'({2'b00, jc, ic});
  end

  coord_t di, dj;
  always_comb begin
    di = dec_word[CW-1:0];
    dj = dec_word[2*CW-1:CW];
    dec_x = xy_t'(KX * xy_t'(di)) + xy_t'(xy_t'(dec_q) % KX);
    dec_y = xy_t'(KX * xy_t'(dj)) + xy_t'(xy_t'(dec_q) / KX);
    if (COMPRESSED) begin
      dec_marker  = (di == '1);
      marker_word = ae_word_t'({{CW{1'b0}}, {CW{1'b1}}});
    end else begin
      dec_marker  = (dec_word[AE_W-1 -: 2] == 2'b01);
      marker_word = ae_word_t'({2'b01, {(2*CW){1'b0}}});
    end
  end

endmodule
