// snn_top: event-driven convolutional SNN accelerator for MNIST-sized input.
//
// An image (W_MAX x W_MAX pixels, raster order) is streamed in through a
// valid/ready port and the class (0..9) comes out with result_valid.
// Inside, P cores (snn_pe) each hold an interlaced address event queue, an
// interlaced double-buffered membrane memory, a convolution unit, a
// thresholding unit and kernel / bias ROMs.  The controller replays one spike
// segment (input channel, time step) at a time from the queue of the core
// that owns that channel and broadcasts its events, one per cycle, to all
// active cores; each core accumulates the segment into the feature map of
// its own output channel.  After all input channels of a time step the cores
// threshold their maps and append the resulting spikes to their own queues.
// After the last convolution layer the classification unit reads the final
// spikes and evaluates the dense output layer.
//
// Status outputs: overflow (some queue ran full and dropped events; the result
// is then not trustworthy) and sat_events (convolution sums that saturated).
//
// The block structure (AEQ, convolution unit, MemPot, thresholding unit,
// kernel / bias ROMs, classification unit, P replicated cores), the
// interlacing, the compressed events, T = 4, P = 8, the AEQ depth of 750 and
// the membrane memory depth of 256 follow the paper; the distribution of work
// over cores, the serial schedule and all widths not in the paper are this
// design's.  The image port stands in for the AXI stream of the FPGA system.
module snn_top
  import snn_pkg::*;
#(
  parameter int unsigned P       = 8,
  parameter int unsigned AEQ_D   = 750,
  parameter int unsigned T_STEPS = 4,
  parameter int          V_T     = 24
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [PIX_W-1:0]  in_pixel,
  output logic              result_valid,
  output logic [3:0]        result_class,
  output logic              busy,
  output logic              overflow,
  output logic [31:0]       sat_events
);

  localparam int unsigned SEGW = $clog2((C_MAX + P - 1) / P * T_STEPS);
  localparam int unsigned SRCW = $clog2(P > 1 ? P : 2);

  // controller outputs
  logic            clear, conv_phase, thr_input, last_t, new_layer, pool, ld_we;
  logic            cls_start, cls_phase, cls_finish, ctl_done;
  logic [1:0]      layer;
  logic [CH_W-1:0] group, ci, cls_ch;
  logic [4:0]      map_w;
  logic [CW-1:0]   win_w;
  logic [P-1:0]    active, thr_start, rd_start;
  logic [SEGW-1:0] out_seg, rd_seg;
  logic [SRCW-1:0] src;
  xy_t             ld_x, ld_y;

  // core outputs
  logic [P-1:0] pe_rd_valid, pe_rd_done, pe_busy, pe_thr_done, pe_ovf, pe_sat;
  qidx_t        pe_rd_q [P];
  ae_word_t     pe_rd_word [P];

  // broadcast event
  logic     ev_valid;
  qidx_t    ev_q;
  ae_word_t ev_word;
  always_comb begin
    ev_valid = pe_rd_valid[src];
    ev_q     = pe_rd_q[src];
    ev_word  = pe_rd_word[src];
  end

  snn_controller #(.P(P), .T_STEPS(T_STEPS)) u_ctl (
    .clk, .rst_n, .start, .done(ctl_done),
    .in_valid, .in_ready, .ld_we, .ld_x, .ld_y,
    .clear, .layer, .group, .map_w, .win_w, .pool, .ci, .active, .conv_phase,
    .thr_start, .thr_input, .last_t, .out_seg, .new_layer, .rd_start, .src, .rd_seg,
    .rd_done(pe_rd_done[src]), .busy(|pe_busy), .thr_done(pe_thr_done[0]),
    .cls_start, .cls_phase, .cls_ch, .cls_finish
  );

  for (genvar p = 0; p < P; p++) begin : g_pe
    snn_pe #(.P(P), .PE_ID(p), .AEQ_D(AEQ_D), .T_STEPS(T_STEPS)) u_pe (
      .clk, .rst_n, .clear,
      .layer, .group, .map_w, .win_w, .pool, .v_t(vmem_t'(V_T)),
      .ci, .ev_valid(ev_valid && conv_phase && active[p]), .ev_q, .ev_word,
      .thr_start(thr_start[p]), .thr_input, .last_t, .out_seg,
      .ld_we(ld_we && (p == 0)), .ld_x, .ld_y, .ld_pix(in_pixel),
      .new_layer, .rd_start(rd_start[p]), .rd_seg,
      .rd_valid(pe_rd_valid[p]), .rd_q(pe_rd_q[p]), .rd_word(pe_rd_word[p]),
      .rd_done(pe_rd_done[p]),
      .busy(pe_busy[p]), .thr_done(pe_thr_done[p]), .overflow(pe_ovf[p]), .sat(pe_sat[p])
    );
  end

  classification_unit #(.T_STEPS(T_STEPS)) u_cls (
    .clk, .rst_n, .start(cls_start),
    .ev_valid(ev_valid && cls_phase), .ev_q, .ev_word, .ev_ch(cls_ch),
    .finish(cls_finish), .result_valid, .result_class, .score()
  );

  logic running;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running    <= 1'b0;
      sat_events <= '0;
    end else begin
      if (start)    running <= 1'b1;
      if (ctl_done) running <= 1'b0;
      if (clear)    sat_events <= '0;
      else          sat_events <= sat_events + 32'($countones(pe_sat));
    end
  end

  assign busy     = running;
  assign overflow = |pe_ovf;

endmodule
