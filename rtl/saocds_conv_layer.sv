// saocds_conv_layer: one convolutional layer of the sparsity-aware
// output-channel dataflow streaming (SAOCDS) accelerator, with its LIF neurons.
//
// What it does. Per timestep the layer receives its IC input channels, one
// W_IN-bit spike row at a time and in input-channel order, and sends its OC
// output channels, one OI-bit spike row at a time and in output-channel
// order. The next layer can therefore take the rows as they come, with no
// control between the two.
//
// How it works (the paper's Algorithm 2). The non-zero weights are stored
// in COO format, sorted by output channel. A timestep is a fixed number REPS
// of iterations, precomputed offline from the weight pattern and written as
// a register. In every iteration:
//   * if fewer than IC input channels have been read, the next one is taken
//     from the input stream, padded and put in the input buffer;
//   * if the current output channel oc has no weight left (nnz_oc != oc),
//     it is an EXTRA iteration: oc's state is loaded and decayed, its spikes
//     are computed and sent, the state is stored and oc advances;
//   * otherwise, if the weight's input channel has arrived, it is a COMPUTE
//     iteration: at the first weight of oc the state is loaded and decayed;
//     the weight is added to every output pixel whose enable-map input is 1;
//     at the last weight of oc the spikes are sent and the state stored;
//   * otherwise it is an EMPTY iteration that waits for the input channel
//     (this happens only while the first output channel is being computed).
// Extra and empty iterations make the layer read every input and write every
// output channel exactly once per timestep, whatever the sparsity.
//
// Interface. in_* and out_* are valid/ready streams (a row moves when both are
// high). cfg writes the COO weights, the per-neuron parameters and the
// registers NNZ, REPS and T (timesteps per frame); the layer is idle while
// REPS is 0. The n_* outputs count events since reset.
//
// Timing. One iteration per clock; an iteration waits only when it must
// read an input row that is not there yet or send an output row that is not
// taken, so with free-flowing streams a timestep takes exactly REPS cycles.
// Memories are read combinationally, which makes a long single-cycle path;
// the paper's HLS design pipelines it, this RTL does not.
//
// This design's own choices: the iteration rate, the stream handshake, the
// configuration bus, "same" padding PAD = (K-1)/2, the soft reset applied at
// the next load (as in the paper's LIF equation), and a DRAIN iteration that
// only reads input once all output channels are done (needed only if REPS
// has to cover more input channels than the other iterations read).
module saocds_conv_layer
  import saocds_pkg::*;
#(
  parameter int unsigned IC       = 2,
  parameter int unsigned OC       = 16,
  parameter int unsigned K        = 11,
  parameter int unsigned W_IN     = 128,
  parameter int unsigned PAD      = (K - 1) / 2,
  parameter int unsigned LAYER_ID = 0,
  localparam int unsigned PADW  = W_IN + 2 * PAD,
  localparam int unsigned OI    = PADW - K + 1,
  localparam int unsigned RI_W  = $clog2(OC * IC),
  localparam int unsigned CI_W  = (K > 1) ? $clog2(K) : 1,
  localparam int unsigned DEPTH = OC * IC * K
) (
  input  logic            clk,
  input  logic            rst_n,
  input  cfg_t            cfg,
  input  logic            in_valid,
  output logic            in_ready,
  input  logic [W_IN-1:0] in_data,
  output logic            out_valid,
  input  logic            out_ready,
  output logic [OI-1:0]   out_data,
  output logic [31:0]     n_iter,    // iterations executed
  output logic [31:0]     n_acc,     // gated accumulations (lanes that added)
  output logic [31:0]     n_extra,   // extra iterations
  output logic [31:0]     n_empty,   // empty iterations
  output logic [31:0]     n_stall,   // cycles an iteration waited on a stream
  output logic [31:0]     n_steps    // timesteps completed
);
  localparam int unsigned OCW = $clog2(OC + 1);
  localparam int unsigned ICW = $clog2(IC + 1);
  localparam int unsigned AW  = $clog2(DEPTH);
  localparam int unsigned EW  = W_D + RI_W + CI_W;
  localparam int unsigned BW  = (IC > 1) ? $clog2(IC) : 1;
  localparam int unsigned SW  = (OC > 1) ? $clog2(OC) : 1;
  localparam int unsigned LW  = (OI > 1) ? $clog2(OI) : 1;

  typedef enum logic [1:0] {IT_DRAIN, IT_EXTRA, IT_COMPUTE, IT_EMPTY} iter_e;

  // ---------------- configuration registers ----------------
  logic [31:0] nnz_total, reps_total, t_total;
  logic        cfg_hit;
  assign cfg_hit = cfg.valid && (cfg.layer == 3'(LAYER_ID));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      nnz_total  <= '0;
      reps_total <= '0;
      t_total    <= 32'd1;
    end else if (cfg_hit && cfg.target == CFG_REG) begin
      case (cfg.addr)
        CFG_ADDR_W'(CFG_REG_NNZ):  nnz_total  <= cfg.data[31:0];
        CFG_ADDR_W'(CFG_REG_REPS): reps_total <= cfg.data[31:0];
        CFG_ADDR_W'(CFG_REG_T):    t_total    <= cfg.data[31:0];
        default: ;
      endcase
    end
  end

  // ---------------- iteration state ----------------
  logic [31:0]    rep_cnt, t_cnt;
  logic [AW:0]    nnz;
  logic [ICW-1:0] ic_read;
  logic [OCW-1:0] oc, pre_oc;
  vmem_t [OI-1:0] acc;

  // ---------------- weight memory ----------------
  logic [EW-1:0] e0, e1;
  logic [AW-1:0] ra0, ra1;
  assign ra0 = AW'(nnz);
  assign ra1 = AW'(nnz + 1'b1);

  coo_weight_mem #(.DEPTH(DEPTH), .RI_W(RI_W), .CI_W(CI_W), .D_W(W_D)) u_wmem (
    .clk    (clk),
    .we     (cfg_hit && cfg.target == CFG_WEIGHT),
    .waddr  (AW'(cfg.addr)),
    .wentry ({cfg.data[15:0], cfg.data[16 +: RI_W], cfg.data[32 +: CI_W]}),
    .raddr0 (ra0), .rentry0(e0),
    .raddr1 (ra1), .rentry1(e1)
  );

  weight_t         w_d;
  logic [RI_W-1:0] w_ri, w_ri_next;
  logic [CI_W-1:0] w_ci;
  assign {w_d, w_ri, w_ci} = e0;
  assign w_ri_next = e1[CI_W +: RI_W];

  // Eq. (1)(2): ic = RI % IC, oc = RI / IC.
  logic           have_w, have_next;
  logic [OCW-1:0] nnz_oc, nnz_next_oc;
  logic [ICW-1:0] w_ic;
  assign have_w      = ({{(31-AW){1'b0}}, nnz} < nnz_total);
  assign have_next   = ({{(31-AW){1'b0}}, nnz} + 32'd1 < nnz_total);
  assign nnz_oc      = have_w    ? OCW'(w_ri / RI_W'(IC))      : OCW'(OC);
  assign nnz_next_oc = have_next ? OCW'(w_ri_next / RI_W'(IC)) : OCW'(OC);
  assign w_ic        = ICW'(w_ri % RI_W'(IC));

  // ---------------- iteration decode ----------------
  logic           active, need_in, in_ok, emits, fire, last_rep;
  logic [ICW-1:0] ic_read_n;
  iter_e          kind;

  assign active    = (reps_total != 0);
  assign need_in   = (ic_read < ICW'(IC));
  assign ic_read_n = ic_read + ICW'(need_in);
  assign in_ok     = !need_in || in_valid;

  always_comb begin
    if (oc == OCW'(OC))      kind = IT_DRAIN;
    else if (oc != nnz_oc)   kind = IT_EXTRA;
    else if (w_ic < ic_read_n) kind = IT_COMPUTE;
    else                     kind = IT_EMPTY;
  end

  assign emits     = (kind == IT_EXTRA) || (kind == IT_COMPUTE && nnz_next_oc != oc);
  assign fire      = active && in_ok && (!emits || out_ready);
  assign in_ready  = active && need_in && (!emits || out_ready);
  assign out_valid = active && in_ok && emits;
  assign last_rep  = (rep_cnt == reps_total - 32'd1);

  // ---------------- input buffer (padding + storage) ----------------
  logic [PADW-1:0] row;
  conv_input_buffer #(.IC(IC), .W_IN(W_IN), .PAD(PAD)) u_ibuf (
    .clk   (clk),
    .we    (fire && need_in),
    .waddr (BW'(ic_read)),
    .wdata (in_data),
    .raddr (BW'(w_ic)),
    .rdata (row)
  );

  // ---------------- neuron state and parameters ----------------
  vmem_t [OI-1:0]         st_v, v_final;
  logic  [OI-1:0]         st_s, spk;
  neuron_param_t [OI-1:0] prm;
  logic                   st_we;

  neuron_state_mem #(.ROWS(OC), .LANES(OI)) u_state (
    .clk (clk), .we(st_we), .wrow(SW'(oc)), .wv(v_final), .ws(spk),
    .rrow(SW'(oc)), .rv(st_v), .rs(st_s)
  );

  neuron_param_mem #(.ROWS(OC), .LANES(OI)) u_param (
    .clk   (clk),
    .we    (cfg_hit && cfg.target == CFG_PARAM),
    .wrow  (SW'(cfg.addr / CFG_ADDR_W'(OI))),
    .wlane (LW'(cfg.addr % CFG_ADDR_W'(OI))),
    .wparam(neuron_param_t'(cfg.data[PARAM_W-1:0])),
    .rrow  (SW'(oc)),
    .rparams(prm)
  );

  // Load & leak, gated accumulation, threshold.
  vmem_t [OI-1:0] u_leak, base, acc_n;
  logic [$clog2(OI+1)-1:0] lanes_on;

  lif_leak #(.LANES(OI)) u_leak_i (
    .first_step(t_cnt == 0), .u(st_v), .s(st_s), .params(prm), .u_leak(u_leak)
  );

  assign base = (oc != pre_oc) ? u_leak : acc;

  goap_accum #(.OI(OI), .PADW(PADW), .CI_W(CI_W)) u_goap (
    .row(row), .ci(w_ci), .d(w_d), .base(base), .acc(acc_n), .n_acc(lanes_on)
  );

  assign v_final = (kind == IT_EXTRA) ? u_leak : acc_n;

  lif_threshold #(.LANES(OI)) u_thr (.u(v_final), .params(prm), .spk(spk));

  assign out_data = spk;
  assign st_we    = fire && emits;

  // ---------------- iteration update ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rep_cnt <= '0;
      t_cnt   <= '0;
      nnz     <= '0;
      ic_read <= '0;
      oc      <= '0;
      pre_oc  <= OCW'(OC);
    end else if (fire) begin
      ic_read <= ic_read_n;
      case (kind)
        IT_EXTRA: oc <= oc + 1'b1;
        IT_COMPUTE: begin
          nnz    <= nnz + 1'b1;
          pre_oc <= oc;
          if (emits) oc <= oc + 1'b1;
        end
        default: ;
      endcase
      if (last_rep) begin
        rep_cnt <= '0;
        nnz     <= '0;
        ic_read <= '0;
        oc      <= '0;
        pre_oc  <= OCW'(OC);
        t_cnt   <= (t_cnt + 32'd1 >= t_total) ? 32'd0 : t_cnt + 32'd1;
      end else begin
        rep_cnt <= rep_cnt + 32'd1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (fire && kind == IT_COMPUTE && !emits) acc <= acc_n;
  end

  // ---------------- event counters ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_iter <= '0; n_acc <= '0; n_extra <= '0; n_empty <= '0; n_stall <= '0; n_steps <= '0;
    end else begin
      if (fire) n_iter <= n_iter + 32'd1;
      if (fire && kind == IT_COMPUTE) n_acc <= n_acc + 32'(lanes_on);
      if (fire && kind == IT_EXTRA) n_extra <= n_extra + 32'd1;
      if (fire && kind == IT_EMPTY) n_empty <= n_empty + 32'd1;
      if (active && !fire) n_stall <= n_stall + 32'd1;
      if (fire && last_rep) n_steps <= n_steps + 32'd1;
    end
  end

  // A correct REPS ends the timestep with every weight used, every output
  // channel sent and every input channel read.
  a_reps: assert property (@(posedge clk) disable iff (!rst_n)
    fire && last_rep |-> ({{(31-AW){1'b0}}, nnz} + ((kind == IT_COMPUTE) ? 32'd1 : 32'd0) == nnz_total)
                         && (ic_read_n == ICW'(IC))
                         && (oc + OCW'(emits) == OCW'(OC)));
endmodule
