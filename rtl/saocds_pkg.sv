// saocds_pkg: widths, configuration-bus types and LIF arithmetic shared by
// every block of the sparsity-aware output-channel streaming SNN accelerator.
//
// Number formats. Weights are 16-bit two's complement fixed point, as the
// network was quantised to 16 bits. Membrane potentials, thresholds and
// soft-reset amounts are V_W = 24-bit two's complement (a longer partial-sum
// width than the weights, chosen here) and wrap on overflow, so the order in
// which partial products are added never changes the result. The decay
// factor alpha is unsigned Q1.15 (0x8000 = 1.0), again a choice of this design.
//
// Neuron model (per neuron, every timestep t of a frame):
//   U_t = alpha * U_{t-1} - theta * S_{t-1} + sum(W * I)
//   S_t = (U_t > U_th)
// alpha * U is computed as (U * alpha) >>> ALPHA_FRAC, i.e. rounded down.
// At t = 0 of a frame U_{t-1} and S_{t-1} are taken as 0.
//
// Configuration bus. Weights, neuron parameters and the per-layer registers
// are written once, before inference, through a write-only bus: one cfg_t
// word per clock while cfg.valid is high. Its layout is this design's own.
package saocds_pkg;

  localparam int unsigned W_D        = 16;  // weight width
  localparam int unsigned V_W        = 24;  // membrane potential width
  localparam int unsigned ALPHA_W    = 16;  // decay factor width
  localparam int unsigned ALPHA_FRAC = 15;  // decay factor fraction bits
  localparam int unsigned PARAM_W    = ALPHA_W + 2 * V_W;  // one neuron's parameters
  localparam int unsigned CFG_ADDR_W = 20;
  localparam int unsigned CFG_DATA_W = 64;

  typedef logic signed [W_D-1:0] weight_t;
  typedef logic signed [V_W-1:0] vmem_t;

  // Parameters of one neuron. Packed so that a row of LANES neurons is a
  // plain bit vector of LANES * PARAM_W bits.
  typedef struct packed {
    logic [ALPHA_W-1:0] alpha;  // decay factor, Q1.15
    vmem_t              theta;  // soft-reset amount
    vmem_t              u_th;   // firing threshold
  } neuron_param_t;

  // What a configuration word writes.
  typedef enum logic [1:0] {
    CFG_REG    = 2'd0,  // layer register: addr 0 = NNZ, 1 = REPS, 2 = T
    CFG_WEIGHT = 2'd1,  // conv: COO entry number addr; FC: weight addr = neuron*N_IN + input
    CFG_PARAM  = 2'd2   // neuron parameters; conv: addr = oc*OI + oi, FC: addr = neuron
  } cfg_target_e;

  localparam int unsigned CFG_REG_NNZ  = 0;
  localparam int unsigned CFG_REG_REPS = 1;
  localparam int unsigned CFG_REG_T    = 2;

  typedef struct packed {
    logic                  valid;
    logic [2:0]            layer;   // 0..4 = Conv1, Conv2, Conv3, FC1, FC2
    cfg_target_e           target;
    logic [CFG_ADDR_W-1:0] addr;
    logic [CFG_DATA_W-1:0] data;    // weight: D in [15:0], RI in [31:16], CI in [39:32]
  } cfg_t;

  // Leak and soft reset of one neuron: alpha * u - theta * s.
  function automatic vmem_t lif_leak_f(input vmem_t u, input logic s, input neuron_param_t p);
    logic signed [V_W+ALPHA_W:0] prod;
    prod = u * $signed({1'b0, p.alpha});
    return vmem_t'(prod >>> ALPHA_FRAC) - (s ? p.theta : vmem_t'(0));
  endfunction

  // Firing rule of one neuron.
  function automatic logic lif_fire_f(input vmem_t u, input neuron_param_t p);
    return u > p.u_th;
  endfunction

endpackage
