// goap_accum: gated one-to-all product of one non-zero weight.
//
// A non-zero weight D at kernel column CI meets, in a stride-1 convolution,
// exactly the inputs CI .. CI+OI-1 of its input channel: its enable map. For
// every output pixel oi the lane adds D when the padded input bit
// row[oi + CI] is 1 and keeps the potential otherwise:
//   acc[oi] = base[oi] + (row[oi + CI] ? D : 0)
// so zero weights are never visited and zero inputs never accumulate. All OI
// lanes work in the same cycle, so every non-zero weight costs the same time.
// n_acc counts the lanes that accumulated (for activity statistics).
// Combinational; adders wrap at V_W bits.
module goap_accum
  import saocds_pkg::*;
#(
  parameter int unsigned OI   = 128,
  parameter int unsigned PADW = 138,
  parameter int unsigned CI_W = 4
) (
  input  logic [PADW-1:0]       row,
  input  logic [CI_W-1:0]       ci,
  input  weight_t               d,
  input  vmem_t [OI-1:0]        base,
  output vmem_t [OI-1:0]        acc,
  output logic [$clog2(OI+1)-1:0] n_acc
);
  logic [OI-1:0] en_map;

  always_comb begin
    en_map = row[32'(ci) +: OI];
    n_acc  = '0;
    for (int i = 0; i < OI; i++) begin
      acc[i] = base[i] + (en_map[i] ? vmem_t'(d) : vmem_t'(0));
      n_acc  = n_acc + ($clog2(OI+1))'(en_map[i]);
    end
  end
endmodule
