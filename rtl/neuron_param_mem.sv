// neuron_param_mem: per-neuron LIF parameters (alpha, theta, U_th).
//
// The network trains alpha, theta and U_th for every neuron. They are kept in
// ROWS rows of LANES neurons: for a convolutional layer a row is one output
// channel with one lane per output pixel, for a fully-connected layer a row is
// one group of PE neurons. A configuration write stores one neuron
// (row wrow, lane wlane); a read returns a whole row combinationally. Not
// reset: the parameters must be written before use.
module neuron_param_mem
  import saocds_pkg::*;
#(
  parameter int unsigned ROWS  = 16,
  parameter int unsigned LANES = 128,
  localparam int unsigned RW = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned LW = (LANES > 1) ? $clog2(LANES) : 1
) (
  input  logic                          clk,
  input  logic                          we,
  input  logic [RW-1:0]                 wrow,
  input  logic [LW-1:0]                 wlane,
  input  neuron_param_t                 wparam,
  input  logic [RW-1:0]                 rrow,
  output neuron_param_t [LANES-1:0]     rparams
);
  neuron_param_t [LANES-1:0] mem [ROWS];

  always_ff @(posedge clk) begin
    if (we) mem[wrow][wlane] <= wparam;
  end

  assign rparams = mem[rrow];
endmodule
