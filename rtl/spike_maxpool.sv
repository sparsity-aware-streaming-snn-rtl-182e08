// spike_maxpool: max pooling of a spike row along its width.
//
// Layers 2 and 3 of the classifier end in max pooling. On binary spikes the
// maximum of a window is the OR of its bits, so output bit j is the OR of
// input bits j*POOL .. j*POOL+POOL-1 (window POOL, stride POOL, default 2:
// the paper names the pooling but not its size). The stream handshake passes
// straight through; the block is combinational and adds no latency.
module spike_maxpool #(
  parameter int unsigned W_IN = 128,
  parameter int unsigned POOL = 2,
  localparam int unsigned W_OUT = W_IN / POOL
) (
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [W_IN-1:0]  in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [W_OUT-1:0] out_data
);
  assign out_valid = in_valid;
  assign in_ready  = out_ready;

  always_comb begin
    for (int j = 0; j < W_OUT; j++) out_data[j] = |in_data[j*POOL +: POOL];
  end
endmodule
