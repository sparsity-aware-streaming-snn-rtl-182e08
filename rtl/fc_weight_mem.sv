// fc_weight_mem: weights and weight mask of one fully-connected layer.
//
// Every 16-bit weight has a 1-bit mask that says whether it is non-zero; the
// mask is 1/16 of the weight storage. The layer ANDs the mask with its input
// spikes to get the fetch mask and fetches only the weights the fetch mask
// selects; a weight that is not fetched reads as 0. Storage is organised for
// the layer's access pattern: word (group, chunk) holds the PE x SIMD weights
// of neurons group*PE .. group*PE+PE-1 and inputs chunk*SIMD .. +SIMD-1, lane
// p*SIMD + s. A configuration write stores one weight (neuron, input) and
// derives its mask bit from the value (W != 0); computing the mask at load
// time instead of offline is this design's choice. Reads are combinational.
module fc_weight_mem
  import saocds_pkg::*;
#(
  parameter int unsigned N_IN  = 2048,
  parameter int unsigned N_OUT = 128,
  parameter int unsigned SIMD  = 32,
  parameter int unsigned PE    = 8,
  localparam int unsigned NG  = N_OUT / PE,
  localparam int unsigned NK  = N_IN / SIMD,
  localparam int unsigned GW  = (NG > 1) ? $clog2(NG) : 1,
  localparam int unsigned KW  = (NK > 1) ? $clog2(NK) : 1,
  localparam int unsigned NW  = (N_OUT > 1) ? $clog2(N_OUT) : 1,
  localparam int unsigned IW  = $clog2(N_IN)
) (
  input  logic                        clk,
  input  logic                        we,
  input  logic [NW-1:0]               wneuron,
  input  logic [IW-1:0]               winput,
  input  weight_t                     wdata,
  input  logic [GW-1:0]               rgroup,
  input  logic [KW-1:0]               rchunk,
  input  logic [PE*SIMD-1:0]          fetch,
  output logic [PE*SIMD-1:0]          rmask,
  output weight_t [PE*SIMD-1:0]       rw
);
  weight_t [PE*SIMD-1:0] wmem [NG*NK];
  logic    [PE*SIMD-1:0] mmem [NG*NK];

  logic [$clog2(NG*NK)-1:0] waddr, raddr;
  logic [$clog2(PE*SIMD)-1:0] wlane;

  assign waddr = ($clog2(NG*NK))'((32'(wneuron) / PE) * NK + (32'(winput) / SIMD));
  assign wlane = ($clog2(PE*SIMD))'((32'(wneuron) % PE) * SIMD + (32'(winput) % SIMD));
  assign raddr = ($clog2(NG*NK))'(rgroup * NK + rchunk);

  always_ff @(posedge clk) begin
    if (we) begin
      wmem[waddr][wlane] <= wdata;
      mmem[waddr][wlane] <= (wdata != '0);
    end
  end

  weight_t [PE*SIMD-1:0] word;
  assign word  = wmem[raddr];
  assign rmask = mmem[raddr];

  always_comb begin
    for (int l = 0; l < PE*SIMD; l++) rw[l] = fetch[l] ? word[l] : weight_t'(0);
  end
endmodule
