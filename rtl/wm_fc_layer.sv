// wm_fc_layer: fully-connected layer with weight-mask (WM) sparsity and LIF
// neurons.
//
// What it does. Per timestep the layer takes N_IN input spikes as N_IN/IN_BEAT
// rows of IN_BEAT bits (for the first FC layer: one row per channel of the
// last convolution, channel-major) and sends its N_OUT spikes as one row.
//
// How it works. Every weight carries a 1-bit mask that is 1 for a non-zero
// weight. Each input row is split into SIMD-bit chunks; for each chunk the
// layer visits the N_OUT/PE neuron groups in turn, one group per clock. There
// the PE neurons of the group AND the SIMD input spikes with their mask bits;
// the result, the fetch mask, selects the weights that are fetched and summed,
// so a weight is fetched only if it is non-zero and its input spiked. At the
// first chunk of a timestep each neuron's stored state is loaded and decayed
// (alpha * U - theta * S); after the last chunk it fires if U > U_th, and the
// new potential and spike are stored.
//
// Timing. The number of cycles does not depend on sparsity: the mask saves
// fetches and additions, not time. One cycle accepts a row, then
// (IN_BEAT/SIMD) * (N_OUT/PE) cycles process it; the output row is held until
// taken and no new row is accepted meanwhile. Per timestep, with streams that
// never wait: (N_IN/IN_BEAT) * (1 + (IN_BEAT/SIMD) * (N_OUT/PE)) + 1 cycles.
//
// Interface. in_* / out_* valid/ready streams; cfg writes weights
// (addr = neuron * N_IN + input), neuron parameters (addr = neuron) and the
// register T (timesteps per frame, addr 2). n_acc counts fetched weights,
// n_iter processing cycles, n_steps finished timesteps.
//
// The paper gives the mask, the AND and the fetch; PE and SIMD counts, the
// processing order and the handshake are this design's choices.
module wm_fc_layer
  import saocds_pkg::*;
#(
  parameter int unsigned N_IN     = 2048,
  parameter int unsigned N_OUT    = 128,
  parameter int unsigned IN_BEAT  = 32,
  parameter int unsigned SIMD     = 32,
  parameter int unsigned PE       = 8,
  parameter int unsigned LAYER_ID = 3
) (
  input  logic               clk,
  input  logic               rst_n,
  input  cfg_t               cfg,
  input  logic               in_valid,
  output logic               in_ready,
  input  logic [IN_BEAT-1:0] in_data,
  output logic               out_valid,
  input  logic               out_ready,
  output logic [N_OUT-1:0]   out_data,
  output logic [31:0]        n_iter,
  output logic [31:0]        n_acc,
  output logic [31:0]        n_steps
);
  localparam int unsigned NB  = N_IN / IN_BEAT;
  localparam int unsigned NCH = IN_BEAT / SIMD;
  localparam int unsigned NG  = N_OUT / PE;
  localparam int unsigned NK  = N_IN / SIMD;
  localparam int unsigned BW  = (NB > 1) ? $clog2(NB) : 1;
  localparam int unsigned CW  = (NCH > 1) ? $clog2(NCH) : 1;
  localparam int unsigned GW  = (NG > 1) ? $clog2(NG) : 1;
  localparam int unsigned KW  = (NK > 1) ? $clog2(NK) : 1;
  localparam int unsigned NW  = (N_OUT > 1) ? $clog2(N_OUT) : 1;
  localparam int unsigned IW  = $clog2(N_IN);
  localparam int unsigned LW  = (PE > 1) ? $clog2(PE) : 1;

  // ---------------- configuration ----------------
  logic        cfg_hit;
  logic [31:0] t_total;
  assign cfg_hit = cfg.valid && (cfg.layer == 3'(LAYER_ID));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) t_total <= 32'd1;
    else if (cfg_hit && cfg.target == CFG_REG && cfg.addr == CFG_ADDR_W'(CFG_REG_T))
      t_total <= cfg.data[31:0];
  end

  // ---------------- control state ----------------
  logic [IN_BEAT-1:0] beat;
  logic               have_beat, out_pending;
  logic [BW-1:0]      b;
  logic [CW-1:0]      c;
  logic [GW-1:0]      g;
  logic [31:0]        t_cnt;
  logic [N_OUT-1:0]   spikes;

  logic first_chunk, last_chunk, last_group;
  assign first_chunk = (b == '0) && (c == '0);
  assign last_chunk  = (b == BW'(NB - 1)) && (c == CW'(NCH - 1));
  assign last_group  = (g == GW'(NG - 1));

  assign in_ready  = !have_beat && !out_pending;
  assign out_valid = out_pending;
  assign out_data  = spikes;

  // ---------------- weights, mask and fetch mask ----------------
  logic [SIMD-1:0]        chunk_bits;
  logic [PE*SIMD-1:0]     wmask, fetch;
  weight_t [PE*SIMD-1:0]  wfetched;
  logic [KW-1:0]          k;

  assign chunk_bits = beat[c*SIMD +: SIMD];
  assign k          = KW'(b * NCH + c);

  always_comb begin
    for (int p = 0; p < PE; p++)
      fetch[p*SIMD +: SIMD] = chunk_bits & wmask[p*SIMD +: SIMD];
  end

  fc_weight_mem #(.N_IN(N_IN), .N_OUT(N_OUT), .SIMD(SIMD), .PE(PE)) u_wmem (
    .clk    (clk),
    .we     (cfg_hit && cfg.target == CFG_WEIGHT),
    .wneuron(NW'(cfg.addr / CFG_ADDR_W'(N_IN))),
    .winput (IW'(cfg.addr % CFG_ADDR_W'(N_IN))),
    .wdata  (weight_t'(cfg.data[W_D-1:0])),
    .rgroup (g),
    .rchunk (k),
    .fetch  (fetch),
    .rmask  (wmask),
    .rw     (wfetched)
  );

  // ---------------- neurons of the current group ----------------
  vmem_t [PE-1:0]         st_v, u_leak, v_new;
  logic  [PE-1:0]         st_s, spk, s_new;
  neuron_param_t [PE-1:0] prm;
  logic                   proc;

  assign proc = have_beat;

  neuron_state_mem #(.ROWS(NG), .LANES(PE)) u_state (
    .clk(clk), .we(proc), .wrow(g), .wv(v_new), .ws(s_new),
    .rrow(g), .rv(st_v), .rs(st_s)
  );

  neuron_param_mem #(.ROWS(NG), .LANES(PE)) u_param (
    .clk   (clk),
    .we    (cfg_hit && cfg.target == CFG_PARAM),
    .wrow  (GW'(cfg.addr / CFG_ADDR_W'(PE))),
    .wlane (LW'(cfg.addr % CFG_ADDR_W'(PE))),
    .wparam(neuron_param_t'(cfg.data[PARAM_W-1:0])),
    .rrow  (g),
    .rparams(prm)
  );

  lif_leak #(.LANES(PE)) u_leak_i (
    .first_step(t_cnt == 0), .u(st_v), .s(st_s), .params(prm), .u_leak(u_leak)
  );

  logic [$clog2(PE*SIMD+1)-1:0] n_fetch;
  always_comb begin
    n_fetch = '0;
    for (int p = 0; p < PE; p++) begin
      v_new[p] = first_chunk ? u_leak[p] : st_v[p];
      for (int s = 0; s < SIMD; s++) begin
        v_new[p] = v_new[p] + vmem_t'(wfetched[p*SIMD + s]);
        n_fetch  = n_fetch + ($clog2(PE*SIMD+1))'(fetch[p*SIMD + s]);
      end
    end
  end

  lif_threshold #(.LANES(PE)) u_thr (.u(v_new), .params(prm), .spk(spk));
  assign s_new = last_chunk ? spk : st_s;

  // ---------------- sequencing ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      have_beat   <= 1'b0;
      out_pending <= 1'b0;
      b <= '0; c <= '0; g <= '0;
      t_cnt <= '0;
    end else begin
      if (in_valid && in_ready) have_beat <= 1'b1;
      if (out_valid && out_ready) out_pending <= 1'b0;
      if (proc) begin
        g <= last_group ? '0 : g + 1'b1;
        if (last_group) begin
          c <= (c == CW'(NCH - 1)) ? '0 : c + 1'b1;
          if (c == CW'(NCH - 1)) begin
            have_beat <= 1'b0;
            b <= (b == BW'(NB - 1)) ? '0 : b + 1'b1;
            if (b == BW'(NB - 1)) begin
              out_pending <= 1'b1;
              t_cnt <= (t_cnt + 32'd1 >= t_total) ? 32'd0 : t_cnt + 32'd1;
            end
          end
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) beat <= in_data;
    if (proc && last_chunk) spikes[g*PE +: PE] <= spk;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_iter <= '0; n_acc <= '0; n_steps <= '0;
    end else if (proc) begin
      n_iter <= n_iter + 32'd1;
      n_acc  <= n_acc + 32'(n_fetch);
      if (last_chunk && last_group) n_steps <= n_steps + 32'd1;
    end
  end

  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data));
endmodule
