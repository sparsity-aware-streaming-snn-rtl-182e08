// saocds_top: five-layer streaming SNN classifier for automatic modulation
// classification, built from SAOCDS convolution layers and weight-mask FC
// layers.
//
// Dataflow. Every layer is its own hardware with its own weights and neuron
// state; layers run concurrently and hand spike rows to each other through
// FIFOs, so a new timestep can enter Conv1 while later layers still
// work on earlier ones. Per timestep:
//   input   2 rows x 128 spikes (I then Q, sigma-delta encoded off-chip)
//   Conv1   2 -> 16 channels, kernel 11, LIF                 (16 rows x 128)
//   Conv2  16 -> 32 channels, kernel 11, LIF, max pool 2     (32 rows x  64)
//   Conv3  32 -> 64 channels, kernel  5, LIF, max pool 2     (64 rows x  32)
//   FC1   2048 -> 128, LIF (input = the 64 rows of Conv3)    ( 1 row  x 128)
//   FC2    128 -> 11,  LIF: one spike per modulation class   ( 1 row  x  11)
// Layer sizes follow the paper; the widths after each layer follow from this
// design's "same" padding and pool size 2.
//
// Interface. in_* takes the input rows (valid/ready); out_* gives the 11 class
// spikes of each timestep. cfg is the configuration bus (see saocds_pkg): the
// COO weights, REPS, NNZ and T of the convolution layers, the FC weights, T
// of the FC layers and all neuron parameters are written through it before
// inference. The remaining outputs are the layers' event counters.
//
// Timing. Throughput is set by the slowest layer: a convolution layer spends
// REPS cycles per timestep (one per non-zero weight plus a few extra and empty
// iterations), FC1 spends 64 * (1 + 16) + 1 = 1089 cycles and FC2 1 * (1 + 4) + 1 = 6.
// A convolution layer reads its input rows at the start of its timestep, so
// each FIFO holds a whole timestep of its producer's rows (16, 32, 64): with
// FIFOs of only 2 rows Conv2 could not run ahead of Conv3 and the two
// took REPS2 + REPS3 cycles per timestep instead of max(REPS2, REPS3). The
// FIFO depths are this design's choice; the paper only says that layers are
// joined by on-chip FIFOs.
module saocds_top
  import saocds_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  cfg_t         cfg,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [127:0] in_data,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [10:0]  out_data,
  output logic [31:0]  conv_n_iter  [3],
  output logic [31:0]  conv_n_acc   [3],
  output logic [31:0]  conv_n_extra [3],
  output logic [31:0]  conv_n_empty [3],
  output logic [31:0]  conv_n_stall [3],
  output logic [31:0]  conv_n_steps [3],
  output logic [31:0]  fc_n_iter    [2],
  output logic [31:0]  fc_n_acc     [2],
  output logic [31:0]  fc_n_steps   [2]
);
  // Each FIFO holds the rows one layer produces in one timestep, so a layer
  // can finish timestep t+1 while the next one still works on t.
  localparam int unsigned FIFO1_DEPTH = 16;  // Conv1 output channels
  localparam int unsigned FIFO2_DEPTH = 32;  // Conv2 output channels
  localparam int unsigned FIFO3_DEPTH = 64;  // Conv3 output channels
  localparam int unsigned FIFO4_DEPTH = 2;   // FC1: one row per timestep

  // Conv1 -> FIFO -> Conv2
  logic         c1_v, c1_r;  logic [127:0] c1_d;
  logic         f1_v, f1_r;  logic [127:0] f1_d;
  // Conv2 -> pool -> FIFO -> Conv3
  logic         c2_v, c2_r;  logic [127:0] c2_d;
  logic         p2_v, p2_r;  logic [63:0]  p2_d;
  logic         f2_v, f2_r;  logic [63:0]  f2_d;
  // Conv3 -> pool -> FIFO -> FC1
  logic         c3_v, c3_r;  logic [63:0]  c3_d;
  logic         p3_v, p3_r;  logic [31:0]  p3_d;
  logic         f3_v, f3_r;  logic [31:0]  f3_d;
  // FC1 -> FIFO -> FC2
  logic         d1_v, d1_r;  logic [127:0] d1_d;
  logic         f4_v, f4_r;  logic [127:0] f4_d;

  saocds_conv_layer #(.IC(2), .OC(16), .K(11), .W_IN(128), .LAYER_ID(0)) u_conv1 (
    .clk, .rst_n, .cfg,
    .in_valid(in_valid), .in_ready(in_ready), .in_data(in_data),
    .out_valid(c1_v), .out_ready(c1_r), .out_data(c1_d),
    .n_iter(conv_n_iter[0]), .n_acc(conv_n_acc[0]), .n_extra(conv_n_extra[0]),
    .n_empty(conv_n_empty[0]), .n_stall(conv_n_stall[0]), .n_steps(conv_n_steps[0])
  );

  spike_fifo #(.WIDTH(128), .DEPTH(FIFO1_DEPTH)) u_fifo1 (
    .clk, .rst_n, .in_valid(c1_v), .in_ready(c1_r), .in_data(c1_d),
    .out_valid(f1_v), .out_ready(f1_r), .out_data(f1_d)
  );

  saocds_conv_layer #(.IC(16), .OC(32), .K(11), .W_IN(128), .LAYER_ID(1)) u_conv2 (
    .clk, .rst_n, .cfg,
    .in_valid(f1_v), .in_ready(f1_r), .in_data(f1_d),
    .out_valid(c2_v), .out_ready(c2_r), .out_data(c2_d),
    .n_iter(conv_n_iter[1]), .n_acc(conv_n_acc[1]), .n_extra(conv_n_extra[1]),
    .n_empty(conv_n_empty[1]), .n_stall(conv_n_stall[1]), .n_steps(conv_n_steps[1])
  );

  spike_maxpool #(.W_IN(128), .POOL(2)) u_pool2 (
    .in_valid(c2_v), .in_ready(c2_r), .in_data(c2_d),
    .out_valid(p2_v), .out_ready(p2_r), .out_data(p2_d)
  );

  spike_fifo #(.WIDTH(64), .DEPTH(FIFO2_DEPTH)) u_fifo2 (
    .clk, .rst_n, .in_valid(p2_v), .in_ready(p2_r), .in_data(p2_d),
    .out_valid(f2_v), .out_ready(f2_r), .out_data(f2_d)
  );

  saocds_conv_layer #(.IC(32), .OC(64), .K(5), .W_IN(64), .LAYER_ID(2)) u_conv3 (
    .clk, .rst_n, .cfg,
    .in_valid(f2_v), .in_ready(f2_r), .in_data(f2_d),
    .out_valid(c3_v), .out_ready(c3_r), .out_data(c3_d),
    .n_iter(conv_n_iter[2]), .n_acc(conv_n_acc[2]), .n_extra(conv_n_extra[2]),
    .n_empty(conv_n_empty[2]), .n_stall(conv_n_stall[2]), .n_steps(conv_n_steps[2])
  );

  spike_maxpool #(.W_IN(64), .POOL(2)) u_pool3 (
    .in_valid(c3_v), .in_ready(c3_r), .in_data(c3_d),
    .out_valid(p3_v), .out_ready(p3_r), .out_data(p3_d)
  );

  spike_fifo #(.WIDTH(32), .DEPTH(FIFO3_DEPTH)) u_fifo3 (
    .clk, .rst_n, .in_valid(p3_v), .in_ready(p3_r), .in_data(p3_d),
    .out_valid(f3_v), .out_ready(f3_r), .out_data(f3_d)
  );

  wm_fc_layer #(.N_IN(2048), .N_OUT(128), .IN_BEAT(32), .SIMD(32), .PE(8), .LAYER_ID(3)) u_fc1 (
    .clk, .rst_n, .cfg,
    .in_valid(f3_v), .in_ready(f3_r), .in_data(f3_d),
    .out_valid(d1_v), .out_ready(d1_r), .out_data(d1_d),
    .n_iter(fc_n_iter[0]), .n_acc(fc_n_acc[0]), .n_steps(fc_n_steps[0])
  );

  spike_fifo #(.WIDTH(128), .DEPTH(FIFO4_DEPTH)) u_fifo4 (
    .clk, .rst_n, .in_valid(d1_v), .in_ready(d1_r), .in_data(d1_d),
    .out_valid(f4_v), .out_ready(f4_r), .out_data(f4_d)
  );

  wm_fc_layer #(.N_IN(128), .N_OUT(11), .IN_BEAT(128), .SIMD(32), .PE(11), .LAYER_ID(4)) u_fc2 (
    .clk, .rst_n, .cfg,
    .in_valid(f4_v), .in_ready(f4_r), .in_data(f4_d),
    .out_valid(out_valid), .out_ready(out_ready), .out_data(out_data),
    .n_iter(fc_n_iter[1]), .n_acc(fc_n_acc[1]), .n_steps(fc_n_steps[1])
  );
endmodule
