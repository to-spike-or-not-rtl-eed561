// snn_controller: schedule of one inference.
//
// The network is evaluated layer by layer; inside a layer, output channels are
// handled in groups of P (one channel per core), each group for T_STEPS time
// steps, and each time step consumes the spike segments of all input
// channels one after another:
//
//   clear memories, load the image into core 0, threshold it T times
//   for l in conv layers:
//     for g in output-channel groups:      (core p computes co = g*P + p)
//       for t in 0 .. T-1:
//         for ci in 0 .. Cin-1:            replay segment (ci, t) of the queue
//                                          of core ci%P to all cores
//         threshold (co, t) in every active core -> segment (co, t)
//     new_layer (written segments become the readable ones)
//   for c in 0 .. 9, t in 0 .. T-1: replay segment (c, t) to the
//                                          classification unit, then finish
//
// A segment (c, t) of a core is its local segment (c/P)*T + t.  Each replay
// takes N + 2 cycles for N events (start, events, end), each thresholding
// pass WW*WW + 2 cycles (WW windows per row).
//
// Interface: start begins an inference; pixels are taken on in_valid &&
// in_ready in raster order; done pulses when result of the classification
// unit is valid.  The remaining outputs drive the cores, the event
// multiplexer and the classification unit (see snn_top).
//
// The paper states the order (layer by layer, channel by channel, each layer
// for T repetitions); the exact loop nesting, the grouping of output
// channels over cores and the serial convolution / thresholding phases are
// this design's choices.
module snn_controller
  import snn_pkg::*;
#(
  parameter int unsigned P       = 8,
  parameter int unsigned T_STEPS = 4
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  output logic                done,
  // image stream handshake
  input  logic                in_valid,
  output logic                in_ready,
  output logic                ld_we,
  output xy_t                 ld_x,
  output xy_t                 ld_y,
  // core control
  output logic                clear,
  output logic [1:0]          layer,
  output logic [CH_W-1:0]     group,
  output logic [4:0]          map_w,
  output logic [CW-1:0]       win_w,
  output logic                pool,
  output logic [CH_W-1:0]     ci,
  output logic [P-1:0]        active,
  output logic                conv_phase,
  output logic [P-1:0]        thr_start,
  output logic                thr_input,
  output logic                last_t,
  output logic [$clog2((C_MAX+P-1)/P*T_STEPS)-1:0] out_seg,
  output logic                new_layer,
  output logic [P-1:0]        rd_start,
  output logic [$clog2(P > 1 ? P : 2)-1:0] src,
  output logic [$clog2((C_MAX+P-1)/P*T_STEPS)-1:0] rd_seg,
  input  logic                rd_done,
  input  logic                busy,
  input  logic                thr_done,
  // classification unit
  output logic                cls_start,
  output logic                cls_phase,
  output logic [CH_W-1:0]     cls_ch,
  output logic                cls_finish
);

  localparam int unsigned SEGW = $clog2((C_MAX + P - 1) / P * T_STEPS);
  localparam int unsigned SRCW = $clog2(P > 1 ? P : 2);
  localparam int unsigned TW   = $clog2(T_STEPS + 1);

  typedef enum logic [3:0] {
    S_IDLE, S_CLEAR, S_WCLR, S_LOAD, S_ITHR, S_ITHR_W, S_NEWL,
    S_SEG, S_SEG_W, S_DRAIN, S_THR, S_THR_W, S_CSEG, S_CSEG_W, S_CDRAIN, S_DONE
  } state_t;

  state_t          state;
  logic [TW-1:0]   t;
  logic [1:0]      dly;
  layer_cfg_t      cfg;

  always_comb begin
    cfg = layer_cfg(int'(layer));
  end

  function automatic logic [CH_W-1:0] n_groups(input layer_cfg_t c);
    return CH_W'((int'(c.cout) + P - 1) / P);
  endfunction

  // static decodes
  always_comb begin
    for (int p = 0; p < P; p++)
      active[p] = (int'(group) * P + p) < int'(cfg.cout);
    last_t = (int'(t) == T_STEPS - 1);
    if (state == S_ITHR || state == S_ITHR_W) begin
      map_w = 5'(W_MAX);
      pool  = 1'b0;
    end else begin
      map_w = cfg.w;
      pool  = cfg.pool;
    end
    win_w      = CW'((int'(map_w) + K - 1) / K);
    thr_input  = (state == S_ITHR || state == S_ITHR_W);
    conv_phase = (state == S_SEG || state == S_SEG_W || state == S_DRAIN);
    cls_phase  = (state == S_CSEG || state == S_CSEG_W || state == S_CDRAIN);
    clear      = (state == S_CLEAR);
    cls_start  = (state == S_CLEAR);
    new_layer  = (state == S_NEWL);
    in_ready   = (state == S_LOAD);
    ld_we      = in_valid && in_ready;
    done       = (state == S_DONE);
    cls_finish = (state == S_DONE);
    cls_ch     = ci;
    src        = SRCW'(int'(ci) % P);
    rd_seg     = SEGW'((int'(ci) / P) * T_STEPS + int'(t));
    out_seg    = SEGW'(int'(group) * T_STEPS + int'(t));
    rd_start   = '0;
    if (state == S_SEG || state == S_CSEG) rd_start[int'(ci) % P] = 1'b1;
    thr_start  = '0;
    if (state == S_ITHR) thr_start[0] = 1'b1;
    if (state == S_THR)  thr_start    = active;
  end

  logic layer_is_last, after_input, cls_phase_next;
  assign layer_is_last = (int'(layer) == NUM_CONV - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      group <= '0; ci <= '0; t <= '0; dly <= '0;
      ld_x  <= '0; ld_y <= '0;
    end else begin
      case (state)
        S_IDLE: if (start) state <= S_CLEAR;
        S_CLEAR: begin
          state <= S_WCLR;
          group <= '0; ci <= '0; t <= '0;
          ld_x  <= '0; ld_y <= '0;
        end
        S_WCLR: if (!busy) state <= S_LOAD;
        S_LOAD: if (in_valid) begin
          if (int'(ld_x) == W_MAX - 1) begin
            ld_x <= '0;
            ld_y <= ld_y + 1'b1;
            if (int'(ld_y) == W_MAX - 1) state <= S_ITHR;
          end else begin
            ld_x <= ld_x + 1'b1;
          end
        end
        S_ITHR:   state <= S_ITHR_W;
        S_ITHR_W: if (thr_done) begin
          if (last_t) begin
            t     <= '0;
            state <= S_NEWL;
          end else begin
            t     <= t + 1'b1;
            state <= S_ITHR;
          end
        end
        S_NEWL: begin
          ci    <= '0;
          t     <= '0;
          group <= '0;
          state <= (cls_phase_next) ? S_CSEG : S_SEG;
        end
        S_SEG:   state <= S_SEG_W;
        S_SEG_W: if (rd_done) begin
          if (int'(ci) == int'(cfg.cin) - 1) begin
            ci    <= '0;
            state <= S_DRAIN;
          end else begin
            ci    <= ci + 1'b1;
            state <= S_SEG;
          end
        end
        S_DRAIN: if (!busy) state <= S_THR;
        S_THR:   state <= S_THR_W;
        S_THR_W: if (thr_done) begin
          if (!last_t) begin
            t     <= t + 1'b1;
            state <= S_SEG;
          end else if (group != n_groups(cfg) - 1'b1) begin
            t     <= '0;
            group <= group + 1'b1;
            state <= S_SEG;
          end else begin
            t     <= '0;
            group <= '0;
            state <= S_NEWL;
          end
        end
        S_CSEG:   state <= S_CSEG_W;
        S_CSEG_W: if (rd_done) begin
          if (!last_t) begin
            t     <= t + 1'b1;
            state <= S_CSEG;
          end else if (int'(ci) != FC_CIN - 1) begin
            t     <= '0;
            ci    <= ci + 1'b1;
            state <= S_CSEG;
          end else begin
            dly   <= '0;
            state <= S_CDRAIN;
          end
        end
        S_CDRAIN: begin
          dly <= dly + 1'b1;
          if (dly == 2'd2) state <= S_DONE;
        end
        S_DONE:  state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // layer bookkeeping at new_layer: the input layer is followed by conv
  // layer 0; after the last conv layer comes the classification phase.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      after_input <= 1'b1;
      layer       <= '0;
    end else if (state == S_CLEAR) begin
      after_input <= 1'b1;
      layer       <= '0;
    end else if (state == S_NEWL) begin
      after_input <= 1'b0;
      if (!after_input && !layer_is_last) layer <= layer + 1'b1;
    end
  end
  assign cls_phase_next = !after_input && layer_is_last;

endmodule
