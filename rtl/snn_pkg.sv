// snn_pkg: shared constants, types and helper functions of the event-driven
// convolutional SNN accelerator.
//
// The accelerator processes a small convolutional spiking network one layer at
// a time.  Spikes are stored as address events (AEs) in K*K interlaced queues:
// a neuron at feature-map coordinate (x, y) lives in queue q = K*(y%K) + x%K
// (its "kernel coordinate") and is stored there as its window address
// (i_c, j_c) = (x/K, y/K).  Each coordinate needs ceil(log2(ceil(W/K))) bits,
// and the code values at or above ceil(W/K) are free; the all-ones value of
// i_c marks the end of a queue segment.  When no free value exists the word
// falls back to carrying two explicit status bits.
//
// The network table below is the MNIST model 32C3-32C3-P3-10C3-10 with 'same'
// padding (the padding follows from its 20,568 parameters).  Widths of
// weights, membrane potentials and pixels are this design's choice.
package snn_pkg;

  // Kernel and interlacing
  localparam int unsigned K      = 3;
  localparam int unsigned NQ     = K * K;          // queues / memories per core
  localparam int unsigned QW     = $clog2(NQ);     // kernel-coordinate index width

  // Input feature map and time steps
  localparam int unsigned W_MAX  = 28;             // largest feature-map width
  localparam int unsigned NWIN   = (W_MAX + K - 1) / K;  // windows per row (10)
  localparam int unsigned CW     = $clog2(NWIN);   // bits per compressed coordinate (4)
  localparam int unsigned XW     = $clog2(W_MAX + K);    // neuron coordinate width

  // Compressed encoding is possible when a code value is left over (Sec. 5.2)
  localparam bit          COMPRESSED = ((1 << CW) > NWIN);
  localparam int unsigned AE_W   = 2 * CW + (COMPRESSED ? 0 : 2);

  // Data widths
  localparam int unsigned VW     = 8;              // membrane potential width
  localparam int unsigned WTW    = 8;              // kernel / bias weight width
  localparam int unsigned PIX_W  = 8;              // input pixel width
  localparam int unsigned MEM_D  = 256;            // membrane potential memory depth
  localparam int unsigned MAW    = $clog2(MEM_D);  // membrane memory address width

  // Network (MNIST model of the evaluation)
  localparam int unsigned NUM_CONV = 3;
  localparam int unsigned CH_W     = 6;            // channel index width
  localparam int unsigned N_CLASS  = 10;
  localparam int unsigned C_MAX    = 32;

  typedef logic [AE_W-1:0]       ae_word_t;
  typedef logic [QW-1:0]         qidx_t;
  typedef logic [CW-1:0]         coord_t;
  typedef logic signed [VW-1:0]  vmem_t;
  typedef logic signed [WTW-1:0] weight_t;
  typedef logic [MAW-1:0]        maddr_t;
  typedef logic [XW-1:0]         xy_t;

  typedef struct packed {
    logic [CH_W-1:0] cin;    // input channels
    logic [CH_W-1:0] cout;   // output channels
    logic [4:0]      w;      // input (= output) feature-map width
    logic            pool;   // KxK max pooling after thresholding
  } layer_cfg_t;

  function automatic layer_cfg_t layer_cfg(input int unsigned l);
    layer_cfg_t c;
    case (l)
      0:       c = '{cin: 6'd1,  cout: 6'd32, w: 5'd28, pool: 1'b0};
      1:       c = '{cin: 6'd32, cout: 6'd32, w: 5'd28, pool: 1'b1};
      default: c = '{cin: 6'd32, cout: 6'd10, w: 5'd9,  pool: 1'b0};
    endcase
    return c;
  endfunction

  // Width of the map the classification (dense) layer reads
  localparam int unsigned FC_W   = 9;
  localparam int unsigned FC_CIN = 10;

  // Saturating add of a weight to a membrane potential
  function automatic vmem_t sat_add(input vmem_t a, input weight_t b, output logic sat);
    logic signed [VW:0] s;
    s = {a[VW-1], a} + {{(VW+1-WTW){b[WTW-1]}}, b};
    sat = 1'b0;
    if (s > $signed({2'b00, {(VW-1){1'b1}}})) begin
      sat = 1'b1;
      return {1'b0, {(VW-1){1'b1}}};
    end else if (s < $signed({2'b11, {(VW-1){1'b0}}})) begin
      sat = 1'b1;
      return {1'b1, {(VW-1){1'b0}}};
    end
    return s[VW-1:0];
  endfunction

endpackage
