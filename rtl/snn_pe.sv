// snn_pe: one processing core of the accelerator (paper Fig. 2).
//
// A core owns the output channels co = g*P + PE_ID.  It holds
//   - an interlaced address event queue (aeq) with the spikes its channels
//     produced in the previous layer (read side) and produce now (write side),
//   - the interlaced, double-buffered membrane potential memory (mempot),
//   - the convolution unit, fed with the input events broadcast to all cores,
//   - the thresholding unit, which writes the new events into its own aeq,
//   - its kernel and bias ROMs.
// The cores run in lockstep under the common controller; the convolution and
// thresholding phases of a core never overlap, so they share the membrane
// memory ports through a multiplexer.  'bank' names the membrane bank being
// accumulated; it flips after every thresholding pass (which reads 'bank' and
// writes the other one).
//
// Image loading: ld_we writes pixel/2 as the initial potential of neuron
// (ld_x, ld_y) in bank 0; only core 0 is loaded (one input channel).
// thr_input = 1 thresholds that map with zero bias (the input layer).
//
// The split of work (output channels over cores, input events broadcast) is
// this design's choice; the paper says only that cores are replicated P times
// with one AEQ each and spike processing is distributed across them.
module snn_pe
  import snn_pkg::*;
#(
  parameter int unsigned P       = 8,
  parameter int unsigned PE_ID   = 0,
  parameter int unsigned AEQ_D   = 750,
  parameter int unsigned T_STEPS = 4
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                clear,
  // layer / group configuration
  input  logic [1:0]          layer,
  input  logic [CH_W-1:0]     group,
  input  logic [4:0]          map_w,
  input  logic [CW-1:0]       win_w,
  input  logic                pool,
  input  vmem_t               v_t,
  // convolution
  input  logic [CH_W-1:0]     ci,
  input  logic                ev_valid,
  input  qidx_t               ev_q,
  input  ae_word_t            ev_word,
  // thresholding
  input  logic                thr_start,
  input  logic                thr_input,
  input  logic                last_t,
  input  logic [$clog2((C_MAX+P-1)/P*T_STEPS)-1:0] out_seg,
  // image load
  input  logic                ld_we,
  input  xy_t                 ld_x,
  input  xy_t                 ld_y,
  input  logic [PIX_W-1:0]    ld_pix,
  // event queue read side
  input  logic                new_layer,
  input  logic                rd_start,
  input  logic [$clog2((C_MAX+P-1)/P*T_STEPS)-1:0] rd_seg,
  output logic                rd_valid,
  output qidx_t               rd_q,
  output ae_word_t            rd_word,
  output logic                rd_done,
  // status
  output logic                busy,
  output logic                thr_done,
  output logic                overflow,
  output logic                sat
);

  localparam int unsigned MAX_SEG = (C_MAX + P - 1) / P * T_STEPS;

  logic bank;

  // ------------------------------------------------------------- ROMs
  weight_t kw [NQ];
  weight_t bias;
  kernel_rom #(.P(P), .PE_ID(PE_ID)) u_krom (
    .clk, .layer, .group, .ci, .w(kw)
  );
  bias_rom #(.P(P), .PE_ID(PE_ID)) u_brom (
    .clk, .layer, .group, .b(bias)
  );

  // ------------------------------------------------------------- units
  maddr_t        cv_raddr [NQ], cv_waddr [NQ], th_raddr [NQ], th_waddr [NQ];
  vmem_t         cv_wdata [NQ], th_wdata [NQ], rdata [NQ];
  logic [NQ-1:0] cv_we, th_we;
  logic          cv_busy, th_busy, clr_busy;

  conv_unit u_conv (
    .clk, .rst_n,
    .ev_valid, .ev_q, .ev_word, .map_w, .win_w, .w(kw),
    .raddr(cv_raddr), .rdata, .we(cv_we), .waddr(cv_waddr), .wdata(cv_wdata),
    .busy(cv_busy), .sat
  );

  logic          seg_open, seg_close;
  logic [NQ-1:0] ev_we;
  ae_word_t      ev_data [NQ];

  threshold_unit u_thr (
    .clk, .rst_n,
    .start(thr_start), .map_w, .win_w, .pool, .last_t,
    .bias(thr_input ? weight_t'(0) : bias), .v_t,
    .raddr(th_raddr), .rdata, .we(th_we), .waddr(th_waddr), .wdata(th_wdata),
    .seg_open, .ev_we, .ev_data, .seg_close,
    .busy(th_busy), .done(thr_done)
  );

  // image loader address
  qidx_t    ld_q;
  ae_word_t ld_word;
  ae_codec u_ld (
    .enc_x(ld_x), .enc_y(ld_y), .enc_q(ld_q), .enc_word(ld_word),
    .dec_q('0), .dec_word('0), .dec_x(), .dec_y(), .dec_marker(), .marker_word()
  );
  maddr_t ld_addr;
  assign ld_addr = maddr_t'(int'(ld_word[2*CW-1:CW]) * int'(win_w) + int'(ld_word[CW-1:0]));

  // ------------------------------------------------------------- memories
  maddr_t        m_raddr [NQ], m_waddr [NQ];
  vmem_t         m_wdata [NQ];
  logic [NQ-1:0] m_we;
  logic          m_wbank;

  always_comb begin
    m_wbank = bank;
    for (int m = 0; m < NQ; m++) begin
      m_raddr[m] = th_busy ? th_raddr[m] : cv_raddr[m];
      if (th_busy) begin
        m_we[m] = th_we[m]; m_waddr[m] = th_waddr[m]; m_wdata[m] = th_wdata[m];
      end else if (cv_busy) begin
        m_we[m] = cv_we[m]; m_waddr[m] = cv_waddr[m]; m_wdata[m] = cv_wdata[m];
      end else begin
        m_we[m]    = ld_we && (ld_q == qidx_t'(m));
        m_waddr[m] = ld_addr;
        m_wdata[m] = vmem_t'({1'b0, ld_pix[PIX_W-1:1]});
      end
    end
    if (th_busy) m_wbank = ~bank;
  end

  mempot #(.DEPTH(MEM_D)) u_mem (
    .clk, .rst_n, .clr_start(clear), .clr_busy,
    .rbank(bank), .raddr(m_raddr), .rdata,
    .wbank(m_wbank), .we(m_we), .waddr(m_waddr), .wdata(m_wdata)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        bank <= 1'b0;
    else if (clear)    bank <= 1'b0;
    else if (thr_done) bank <= ~bank;
  end

  // ------------------------------------------------------------- queue
  aeq #(.D(AEQ_D), .MAX_SEG(MAX_SEG)) u_aeq (
    .clk, .rst_n, .clear, .new_layer,
    .seg_open, .wr_seg(out_seg), .wr_en(ev_we), .wr_data(ev_data), .seg_close,
    .rd_start, .rd_seg, .rd_valid, .rd_q, .rd_word, .rd_done, .rd_busy(),
    .overflow
  );

  assign busy = cv_busy | th_busy | clr_busy;

  // The convolution and thresholding phases must not overlap.
  assert property (@(posedge clk) disable iff (!rst_n) !(cv_busy && th_busy));

endmodule
