// mempot: interlaced, double-buffered membrane potential memory of one core.
//
// NQ = K*K memories, each holding two banks of DEPTH signed VW-bit words.  The
// neuron (x, y) of a feature map lives in memory K*(y%K) + x%K at address
// (y/K)*WW + x/K, WW being the number of KxK windows per row.  Any placement
// of a KxK kernel covers exactly one neuron of every memory (paper Fig. 4), so
// one convolution step reads and writes all nine neighbours in one cycle.
//
// Two banks hold the potentials before and after a thresholding pass (paper:
// membrane potentials are stored twice).  Every memory has one write port and
// one combinational read port (LUTRAM style, the improved memory organisation
// of the paper); bank and address are chosen per port.
//
// clr_start zeroes both banks of all memories in DEPTH cycles (clr_busy high
// meanwhile); this sequencer is this design's addition, used once per image.
module mempot
  import snn_pkg::*;
#(
  parameter int unsigned DEPTH = MEM_D
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clr_start,
  output logic                     clr_busy,
  // read port
  input  logic                     rbank,
  input  logic [$clog2(DEPTH)-1:0] raddr [NQ],
  output vmem_t                    rdata [NQ],
  // write port
  input  logic                     wbank,
  input  logic [NQ-1:0]            we,
  input  logic [$clog2(DEPTH)-1:0] waddr [NQ],
  input  vmem_t                    wdata [NQ]
);

  localparam int unsigned AW = $clog2(DEPTH);

  vmem_t         mem0 [NQ][DEPTH];
  vmem_t         mem1 [NQ][DEPTH];
  logic [AW-1:0] clr_addr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      clr_busy <= 1'b0;
      clr_addr <= '0;
    end else if (clr_start) begin
      clr_busy <= 1'b1;
      clr_addr <= '0;
    end else if (clr_busy) begin
      clr_addr <= clr_addr + 1'b1;
      if (clr_addr == AW'(DEPTH - 1)) clr_busy <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    for (int m = 0; m < NQ; m++) begin
      if (clr_busy) begin
        mem0[m][clr_addr] <= '0;
        mem1[m][clr_addr] <= '0;
      end else if (we[m]) begin
        if (wbank) mem1[m][waddr[m]] <= wdata[m];
        else       mem0[m][waddr[m]] <= wdata[m];
      end
    end
  end

  always_comb
    for (int m = 0; m < NQ; m++)
      rdata[m] = rbank ? mem1[m][raddr[m]] : mem0[m][raddr[m]];

endmodule
