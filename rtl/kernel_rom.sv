// kernel_rom: read-only convolution weights of one core.
//
// A core with index PE_ID computes the output channels co = g*P + PE_ID
// (g = 0, 1, ...), so it only stores the KxK kernels of those channels, for
// every input channel and every convolution layer.  One word holds the NQ =
// K*K weights of one kernel, weight k = K*ky + kx in bits [k*WTW +: WTW], so a
// convolution step needs a single read.  Address = layer base + g*Cin + ci.
//
// Timing: synchronous read, data one cycle after the address.
//
// The paper names a Kernel ROM per core and says the weights of a core fit in
// 2.5 BRAMs; the word layout is this design's.  The contents stand in for
// trained weights: kernel_init() below fills the ROM with a fixed integer
// pattern, w = ((29*l + 7*co + 13*ci + 5*k + 3*co*ci) mod 16) - 6.  Replace
// that function (or load a table) to run a trained network.
module kernel_rom
  import snn_pkg::*;
#(
  parameter int unsigned P     = 8,
  parameter int unsigned PE_ID = 0
) (
  input  logic               clk,
  input  logic [1:0]         layer,
  input  logic [CH_W-1:0]    group,
  input  logic [CH_W-1:0]    ci,
  output weight_t            w [NQ]
);

  function automatic int unsigned groups(input int unsigned l);
    return (int'(layer_cfg(l).cout) + P - 1) / P;
  endfunction

  function automatic int unsigned base(input int unsigned l);
    int unsigned b = 0;
    for (int unsigned i = 0; i < l; i++) b += groups(i) * layer_cfg(i).cin;
    return b;
  endfunction

  localparam int unsigned DEPTH = base(NUM_CONV);
  localparam int unsigned AW    = $clog2(DEPTH);

  function automatic weight_t kernel_init(input int unsigned l, input int unsigned co,
                                          input int unsigned c, input int unsigned k);
    int unsigned v;
    v = (29 * l + 7 * co + 13 * c + 5 * k + 3 * co * c) % 16;
    return weight_t'(int'(v) - 6);
  endfunction

  logic [NQ*WTW-1:0] rom [DEPTH];

  initial begin
    for (int unsigned l = 0; l < NUM_CONV; l++)
      for (int unsigned g = 0; g < groups(l); g++)
        for (int unsigned c = 0; c < layer_cfg(l).cin; c++)
          for (int unsigned k = 0; k < NQ; k++)
            rom[base(l) + g * layer_cfg(l).cin + c][k*WTW +: WTW] =
              kernel_init(l, g * P + PE_ID, c, k);
  end

  logic [AW-1:0]     addr;
  logic [NQ*WTW-1:0] word;

  always_comb begin
    case (layer)
      2'd0:    addr = AW'(base(0) + int'(group) * layer_cfg(0).cin + int'(ci));
      2'd1:    addr = AW'(base(1) + int'(group) * layer_cfg(1).cin + int'(ci));
      default: addr = AW'(base(2) + int'(group) * layer_cfg(2).cin + int'(ci));
    endcase
  end

  always_ff @(posedge clk) word <= rom[addr];

  always_comb
    for (int k = 0; k < NQ; k++) w[k] = weight_t'(word[k*WTW +: WTW]);

endmodule
