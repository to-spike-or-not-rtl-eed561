// bias_rom: read-only bias of the output channels of one core.
//
// Core PE_ID holds the biases of channels co = g*P + PE_ID of every
// convolution layer; address = layer base + g.  The thresholding unit adds the
// bias of the channel to every membrane potential once per time step.
//
// Timing: synchronous read, data one cycle after the address.
//
// The paper names a Bias ROM feeding the thresholding unit; the layout is this
// design's.  The contents stand in for trained biases:
// b = ((5*co + 3*l) mod 7) - 3.
module bias_rom
  import snn_pkg::*;
#(
  parameter int unsigned P     = 8,
  parameter int unsigned PE_ID = 0
) (
  input  logic            clk,
  input  logic [1:0]      layer,
  input  logic [CH_W-1:0] group,
  output weight_t         b
);

  function automatic int unsigned groups(input int unsigned l);
    return (int'(layer_cfg(l).cout) + P - 1) / P;
  endfunction

  function automatic int unsigned base(input int unsigned l);
    int unsigned s = 0;
    for (int unsigned i = 0; i < l; i++) s += groups(i);
    return s;
  endfunction

  localparam int unsigned DEPTH = base(NUM_CONV);
  localparam int unsigned AW    = $clog2(DEPTH);

  function automatic weight_t bias_init(input int unsigned l, input int unsigned co);
    return weight_t'(int'((5 * co + 3 * l) % 7) - 3);
  endfunction

  weight_t rom [DEPTH];

  initial begin
    for (int unsigned l = 0; l < NUM_CONV; l++)
      for (int unsigned g = 0; g < groups(l); g++)
        rom[base(l) + g] = bias_init(l, g * P + PE_ID);
  end

  logic [AW-1:0] addr;
  always_comb begin
    case (layer)
      2'd0:    addr = AW'(base(0) + int'(group));
      2'd1:    addr = AW'(base(1) + int'(group));
      default: addr = AW'(base(2) + int'(group));
    endcase
  end

  always_ff @(posedge clk) b <= rom[addr];

endmodule
