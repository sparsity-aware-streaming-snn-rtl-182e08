// lif_leak: "load and leak" of a row of LIF neurons.
//
// For every lane: u_leak = alpha * u - theta * s, where u and s are the
// potential and spike stored at the end of the previous timestep and alpha,
// theta that neuron's own parameters. This is the first two terms of the LIF
// equation U_t = alpha U_{t-1} + W I - theta S_{t-1}; the weighted inputs are
// added afterwards. At the first timestep of a frame (first_step) the
// previous state is taken as zero and the output is 0. alpha * u uses one
// multiplier per lane and is rounded down (see saocds_pkg). Combinational.
module lif_leak
  import saocds_pkg::*;
#(
  parameter int unsigned LANES = 128
) (
  input  logic                      first_step,
  input  vmem_t [LANES-1:0]         u,
  input  logic  [LANES-1:0]         s,
  input  neuron_param_t [LANES-1:0] params,
  output vmem_t [LANES-1:0]         u_leak
);
  always_comb begin
    for (int i = 0; i < LANES; i++) begin
      u_leak[i] = first_step ? vmem_t'(0) : lif_leak_f(u[i], s[i], params[i]);
    end
  end
endmodule
