// aeq: interlaced, segmented address event queue of one core.
//
// The queue is NQ = K*K separate memories ("queues"), one per kernel
// coordinate, each D words deep and AE_W bits wide (paper Fig. 3).  Every
// queue has its own write port, so the thresholding unit can store the spikes
// of a whole KxK window in one cycle; a read multiplexer hands out one event
// per cycle.
//
// Segments.  Events are grouped into segments, one per (channel, time step)
// of a layer.  seg_open records, for every queue, where segment wr_seg begins;
// seg_close appends the end-of-segment marker word to every queue.  The
// reader replays any segment of the previous layer: rd_start loads the NQ read
// pointers from the start table, then each cycle the lowest-numbered queue
// whose head is not a marker delivers its head (rd_valid, rd_q, rd_word).  When
// every head is a marker, rd_done pulses.  A segment of N events therefore
// takes N + 1 cycles after rd_start.
//
// Layers.  Each queue is a ring buffer holding two regions: events of the
// previous layer (read side) and of the layer being computed (write side).
// new_layer turns the write region into the read region and frees the old read
// region; the start tables are ping-ponged the same way.  A write that would
// fill a queue completely is dropped and sets the sticky overflow flag.  An
// event is already dropped when only one word is left, which is kept for the
// segment's end marker; should a marker be lost all the same, a replay also
// stops at the end of the readable region, so an overflow corrupts results
// (flagged) but never stalls the schedule.
//
// Memories are written as arrays with combinational read (LUTRAM style, the
// improved memory organisation of the paper).  The segment start tables,
// ring-buffer bookkeeping, marker scheme and read priority are this design's
// choices; the paper gives the interlacing and the segmentation by channel
// and time step.
module aeq
  import snn_pkg::*;
#(
  parameter int unsigned D       = 750,   // words per queue
  parameter int unsigned MAX_SEG = 16     // segments per layer and core
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       clear,       // empty all queues, clear overflow
  input  logic                       new_layer,
  // write side
  input  logic                       seg_open,
  input  logic [$clog2(MAX_SEG)-1:0] wr_seg,
  input  logic [NQ-1:0]              wr_en,
  input  ae_word_t                   wr_data [NQ],
  input  logic                       seg_close,
  // read side
  input  logic                       rd_start,
  input  logic [$clog2(MAX_SEG)-1:0] rd_seg,
  output logic                       rd_valid,
  output qidx_t                      rd_q,
  output ae_word_t                   rd_word,
  output logic                       rd_done,
  output logic                       rd_busy,
  // status
  output logic                       overflow
);

  localparam int unsigned PW = $clog2(D);
  localparam int unsigned SW = $clog2(MAX_SEG);
  typedef logic [PW-1:0] ptr_t;

  ae_word_t mem [NQ][D];
  ptr_t     start_tab [2][NQ][MAX_SEG];
  logic     tab_sel;                      // table being written
  ptr_t     wptr [NQ];
  ptr_t     base [NQ];                    // oldest live word
  ptr_t     out_base [NQ];                // start of the current write region
  ptr_t     rptr [NQ];

  // marker word from the codec
  ae_word_t marker_word;
  ae_codec u_marker (
    .enc_x('0), .enc_y('0), .enc_q(), .enc_word(),
    .dec_q('0), .dec_word('0), .dec_x(), .dec_y(), .dec_marker(),
    .marker_word(marker_word)
  );

  function automatic ptr_t inc(input ptr_t p);
    return (p == ptr_t'(D - 1)) ? '0 : p + 1'b1;
  endfunction

  // ---------------------------------------------------------------- write
  logic [NQ-1:0] do_wr, full;
  ae_word_t      wdat [NQ];
  always_comb begin
    for (int q = 0; q < NQ; q++) begin
      // an event needs two free words, so that the end marker of its segment
      // still fits; the marker itself needs one
      full[q]  = (inc(wptr[q]) == base[q]) || (!seg_close && inc(inc(wptr[q])) == base[q]);
      do_wr[q] = (seg_close || wr_en[q]) && !full[q];
      wdat[q]  = seg_close ? marker_word : wr_data[q];
    end
  end

  always_ff @(posedge clk) begin
    for (int q = 0; q < NQ; q++)
      if (do_wr[q]) mem[q][wptr[q]] <= wdat[q];
  end

  always_ff @(posedge clk) begin
    if (seg_open)
      for (int q = 0; q < NQ; q++) start_tab[tab_sel][q][wr_seg] <= wptr[q];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tab_sel  <= 1'b0;
      overflow <= 1'b0;
      for (int q = 0; q < NQ; q++) begin
        wptr[q] <= '0; base[q] <= '0; out_base[q] <= '0;
      end
    end else if (clear) begin
      tab_sel  <= 1'b0;
      overflow <= 1'b0;
      for (int q = 0; q < NQ; q++) begin
        wptr[q] <= '0; base[q] <= '0; out_base[q] <= '0;
      end
    end else begin
      for (int q = 0; q < NQ; q++)
        if (do_wr[q]) wptr[q] <= inc(wptr[q]);
      if (|((wr_en | {NQ{seg_close}}) & full)) overflow <= 1'b1;
      if (new_layer) begin
        tab_sel <= ~tab_sel;
        for (int q = 0; q < NQ; q++) begin
          base[q]     <= out_base[q];
          out_base[q] <= wptr[q];
        end
      end
    end
  end

  // ---------------------------------------------------------------- read
  logic [NQ-1:0] head_marker;
  ae_word_t      head [NQ];
  logic          any_evt;
  qidx_t         sel;

  always_comb begin
    any_evt = 1'b0;
    sel     = '0;
    for (int q = 0; q < NQ; q++) begin
      head[q]        = mem[q][rptr[q]];
      // the end of the readable region also ends a segment (only reached if
      // an overflow dropped a marker)
      head_marker[q] = (head[q] == marker_word) || (rptr[q] == out_base[q]);
    end
    for (int q = NQ - 1; q >= 0; q--)
      if (!head_marker[q]) begin
        any_evt = 1'b1;
        sel     = qidx_t'(q);
      end
  end

  assign rd_valid = rd_busy && any_evt;
  assign rd_q     = sel;
  assign rd_word  = head[sel];
  assign rd_done  = rd_busy && !any_evt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_busy <= 1'b0;
      for (int q = 0; q < NQ; q++) rptr[q] <= '0;
    end else if (rd_start) begin
      rd_busy <= 1'b1;
      for (int q = 0; q < NQ; q++) rptr[q] <= start_tab[~tab_sel][q][rd_seg];
    end else if (rd_busy) begin
      if (any_evt) rptr[sel] <= inc(rptr[sel]);
      else         rd_busy   <= 1'b0;
    end
  end

  // A read may not be started while one is running.
  assert property (@(posedge clk) disable iff (!rst_n) rd_start |-> !rd_busy);

endmodule
