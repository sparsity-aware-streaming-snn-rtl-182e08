// lif_threshold: firing decision of a row of LIF neurons.
//
// For every lane spk = (u > u_th), a signed strict comparison as in the LIF
// equation S_t = 1 if U_t > U_th0. The potential itself is stored unchanged;
// the soft reset is applied at the next load (see lif_leak). Combinational.
module lif_threshold
  import saocds_pkg::*;
#(
  parameter int unsigned LANES = 128
) (
  input  vmem_t [LANES-1:0]         u,
  input  neuron_param_t [LANES-1:0] params,
  output logic [LANES-1:0]          spk
);
  always_comb begin
    for (int i = 0; i < LANES; i++) spk[i] = lif_fire_f(u[i], params[i]);
  end
endmodule
