// conv_input_buffer: zero padding and storage of the input channels of one
// convolutional layer.
//
// The previous layer delivers one input channel (a row of W_IN spikes) at a
// time, in input-channel order. Each row is padded with PAD zeros on both
// sides, as the left half of the single-layer dataflow figure shows, and kept
// in row waddr, so that every non-zero weight of the timestep can read its
// enable map from it again. The read port returns the padded row raddr; when
// raddr is the row being written in the same cycle, the new row is passed
// through, so an iteration can use the channel it is reading. Amount of
// padding ((K-1)/2, "same" convolution) and the bypass are choices of this
// design. Write: registered at the clock edge. Read: combinational.
module conv_input_buffer #(
  parameter int unsigned IC   = 2,
  parameter int unsigned W_IN = 128,
  parameter int unsigned PAD  = 5,
  localparam int unsigned PADW = W_IN + 2 * PAD,
  localparam int unsigned AW   = (IC > 1) ? $clog2(IC) : 1
) (
  input  logic            clk,
  input  logic            we,
  input  logic [AW-1:0]   waddr,
  input  logic [W_IN-1:0] wdata,
  input  logic [AW-1:0]   raddr,
  output logic [PADW-1:0] rdata
);
  logic [PADW-1:0] rows [IC];
  logic [PADW-1:0] padded;

  // Bit j of an input row lands at bit j + PAD; the PAD bits at each end are 0.
  assign padded = {{PAD{1'b0}}, wdata, {PAD{1'b0}}};

  always_ff @(posedge clk) begin
    if (we) rows[waddr] <= padded;
  end

  assign rdata = (we && waddr == raddr) ? padded : rows[raddr];
endmodule
