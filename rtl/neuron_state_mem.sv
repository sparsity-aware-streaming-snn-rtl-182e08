// neuron_state_mem: membrane potentials and last spikes of one layer.
//
// One row per output channel (or FC neuron group), LANES neurons wide. Each
// neuron keeps its potential U and the spike S it emitted in the last
// timestep, because the soft reset - theta * S_{t-1} is applied when the
// potential is next loaded and decayed. The layer reads a row when it starts
// an output channel and writes it back when the channel ends, so the memory
// is touched only at channel transitions. Read combinational, write at the
// clock edge. Not reset: the layers ignore the contents at the first
// timestep of a frame.
module neuron_state_mem
  import saocds_pkg::*;
#(
  parameter int unsigned ROWS  = 16,
  parameter int unsigned LANES = 128,
  localparam int unsigned RW = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic                    clk,
  input  logic                    we,
  input  logic [RW-1:0]           wrow,
  input  vmem_t [LANES-1:0]       wv,
  input  logic  [LANES-1:0]       ws,
  input  logic [RW-1:0]           rrow,
  output vmem_t [LANES-1:0]       rv,
  output logic  [LANES-1:0]       rs
);
  vmem_t [LANES-1:0] vmem [ROWS];
  logic  [LANES-1:0] smem [ROWS];

  always_ff @(posedge clk) begin
    if (we) begin
      vmem[wrow] <= wv;
      smem[wrow] <= ws;
    end
  end

  assign rv = vmem[rrow];
  assign rs = smem[rrow];
endmodule
