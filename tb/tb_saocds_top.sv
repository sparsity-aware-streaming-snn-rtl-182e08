// tb_saocds_top: end-to-end runs of the complete five-layer classifier at
// its full size (the top has no parameters).
//
// Sixteen weight-density configurations are run one after the other, each
// after a reset: per-layer densities 25-20-15-20-25 and 20-15-10-15-20 %, and
// uniform 5, 100, 90, 80, 75, 70, 60, 50, 40, 30, 25, 20, 15 and 10 %. For each, the kernels are drawn at random at those
// densities and shaped so that the supplementary iterations occur: Conv1's
// and Conv2's first output channel only use a late input channel (empty
// iterations) and some output channels of Conv2 and Conv3 have no weight at
// all (extra iterations). Neuron parameters and input spikes are random.
// Everything is loaded through the configuration bus, then FRAMES frames of
// T timesteps are streamed in with random gaps while the output is taken
// with random stalls.
//
// The reference is a plain sliding-window / dense model of the network in
// integer arithmetic. Checked for every configuration: the spike rows leaving
// every layer, the 11 class spikes of every timestep, the counts of extra and
// empty iterations, of conv accumulations and of FC weight fetches, the
// steady-state cycles per timestep against max(REPS1..3, FC1 cycles), and
// the ratio of conv accumulations to those of a dense sliding window, which
// must follow the weight density. Each mechanism (extra and empty
// iterations, stream stalls, FIFO back-pressure, max pooling, mask-skipped FC
// fetches, frame restart of the neuron state) is counted over all runs and
// must occur at least once.
module tb_saocds_top;
  import saocds_pkg::*;
  import saocds_tb_pkg::*;

  localparam int T = 3, FRAMES = 2, STEPS = T * FRAMES;

  logic clk = 0, rst_n = 0;
  cfg_t cfg;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [127:0] in_data;
  logic [10:0] out_data;
  logic [31:0] conv_n_iter [3], conv_n_acc [3], conv_n_extra [3], conv_n_empty [3];
  logic [31:0] conv_n_stall [3], conv_n_steps [3], fc_n_iter [2], fc_n_acc [2], fc_n_steps [2];

  saocds_top dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0, cyc = 0;
  int dyn;  // 0; keeps the simulator from unrolling the model's loops
  always @(posedge clk) cyc++;

  initial begin
    #200ms; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // ---------------- network description ----------------
  localparam int CIC [3] = '{2, 16, 32};
  localparam int COC [3] = '{16, 32, 64};
  localparam int CK  [3] = '{11, 11, 5};
  localparam int CW  [3] = '{128, 128, 64};   // input width = output width
  localparam int CPOOL [3] = '{1, 2, 2};
  int DENS [5];

  int cw1 [16][2][11];
  int cw2 [32][16][11];
  int cw3 [64][32][5];
  int fw1 [128][2048];
  int fw2 [11][128];
  int alpha1[16][128], theta1[16][128], uth1[16][128];
  int alpha2[32][128], theta2[32][128], uth2[32][128];
  int alpha3[64][64],  theta3[64][64],  uth3[64][64];
  int alpha4[128], theta4[128], uth4[128];
  int alpha5[11],  theta5[11],  uth5[11];
  int reps [3], n_ex [3], n_em [3], nnz [3];

  bit x0 [STEPS][2][128];
  logic [127:0] e1 [STEPS][16];
  logic [127:0] e2 [STEPS][32];   // before pooling
  logic [63:0]  e3 [STEPS][64];   // before pooling
  logic [127:0] e4 [STEPS];
  logic [10:0]  e5 [STEPS];
  int exp_cacc [3], exp_facc [2], dense_cacc [3];

  function automatic int rweight(input int dens);
    return (urand(100) < dens) ? urand(1001) - 400 : 0;
  endfunction

  // ---------------- reference model ----------------
  task automatic reference();
    int u1[16][128], u2[32][128], u3[64][64], u4[128], u5[11];
    bit s1[16][128], s2[32][128], s3[64][64], s4[128], s5[11];
    bit p2 [32][64];
    bit p3 [64][32];
    for (int l = 0; l < 3 + dyn; l++) begin exp_cacc[l] = 0; dense_cacc[l] = 0; end
    exp_facc[0] = 0; exp_facc[1] = 0;
    for (int t = 0; t < STEPS + dyn; t++) begin
      bit first;
      first = (t % T) == 0;
      // Conv1
      for (int o = 0; o < 16 + dyn; o++)
        for (int p = 0; p < 128 + dyn; p++) begin
          int v;
          v = first ? 0 : leak_ref(u1[o][p], s1[o][p], alpha1[o][p], theta1[o][p]);
          for (int i = 0; i < 2 + dyn; i++)
            for (int k = 0; k < 11 + dyn; k++) begin
              int q; q = p + k - 5;
              if (q >= 0 && q < 128 && x0[t][i][q]) dense_cacc[0]++;
              if (q >= 0 && q < 128 && x0[t][i][q] && cw1[o][i][k] != 0) begin
                v = wrap24(longint'(v) + cw1[o][i][k]); exp_cacc[0]++;
              end
            end
          u1[o][p] = v; s1[o][p] = v > uth1[o][p]; e1[t][o][p] = s1[o][p];
        end
      // Conv2 + pool
      for (int o = 0; o < 32 + dyn; o++)
        for (int p = 0; p < 128 + dyn; p++) begin
          int v;
          v = first ? 0 : leak_ref(u2[o][p], s2[o][p], alpha2[o][p], theta2[o][p]);
          for (int i = 0; i < 16 + dyn; i++)
            for (int k = 0; k < 11 + dyn; k++) begin
              int q; q = p + k - 5;
              if (q >= 0 && q < 128 && s1[i][q]) dense_cacc[1]++;
              if (q >= 0 && q < 128 && s1[i][q] && cw2[o][i][k] != 0) begin
                v = wrap24(longint'(v) + cw2[o][i][k]); exp_cacc[1]++;
              end
            end
          u2[o][p] = v; s2[o][p] = v > uth2[o][p]; e2[t][o][p] = s2[o][p];
        end
      for (int o = 0; o < 32 + dyn; o++) for (int p = 0; p < 64 + dyn; p++) p2[o][p] = s2[o][2*p] | s2[o][2*p+1];
      // Conv3 + pool
      for (int o = 0; o < 64 + dyn; o++)
        for (int p = 0; p < 64 + dyn; p++) begin
          int v;
          v = first ? 0 : leak_ref(u3[o][p], s3[o][p], alpha3[o][p], theta3[o][p]);
          for (int i = 0; i < 32 + dyn; i++)
            for (int k = 0; k < 5 + dyn; k++) begin
              int q; q = p + k - 2;
              if (q >= 0 && q < 64 && p2[i][q]) dense_cacc[2]++;
              if (q >= 0 && q < 64 && p2[i][q] && cw3[o][i][k] != 0) begin
                v = wrap24(longint'(v) + cw3[o][i][k]); exp_cacc[2]++;
              end
            end
          u3[o][p] = v; s3[o][p] = v > uth3[o][p]; e3[t][o][p] = s3[o][p];
        end
      for (int o = 0; o < 64 + dyn; o++) for (int p = 0; p < 32 + dyn; p++) p3[o][p] = s3[o][2*p] | s3[o][2*p+1];
      // FC1 (input index = channel * 32 + pixel)
      for (int n = 0; n < 128 + dyn; n++) begin
        int v;
        v = first ? 0 : leak_ref(u4[n], s4[n], alpha4[n], theta4[n]);
        for (int c = 0; c < 64 + dyn; c++)
          for (int p = 0; p < 32 + dyn; p++)
            if (p3[c][p] && fw1[n][c*32 + p] != 0) begin
              v = wrap24(longint'(v) + fw1[n][c*32 + p]); exp_facc[0]++;
            end
        u4[n] = v; s4[n] = v > uth4[n]; e4[t][n] = s4[n];
      end
      // FC2
      for (int n = 0; n < 11 + dyn; n++) begin
        int v;
        v = first ? 0 : leak_ref(u5[n], s5[n], alpha5[n], theta5[n]);
        for (int i = 0; i < 128 + dyn; i++)
          if (s4[i] && fw2[n][i] != 0) begin v = wrap24(longint'(v) + fw2[n][i]); exp_facc[1]++; end
        u5[n] = v; s5[n] = v > uth5[n]; e5[t][n] = s5[n];
      end
    end
  endtask

  // ---------------- configuration ----------------
  task automatic cfg_put(input int layer, input cfg_target_e tg, input int addr, input logic [63:0] data);
    @(negedge clk);
    cfg.valid = 1; cfg.layer = 3'(layer); cfg.target = tg; cfg.addr = CFG_ADDR_W'(addr); cfg.data = data;
  endtask

  task automatic load_conv(input int l);
    int ri[$], ci[$], d[$];
    int oc_n, ic_n, k_n, w_n;
    oc_n = COC[l]; ic_n = CIC[l]; k_n = CK[l]; w_n = CW[l];
    for (int o = 0; o < oc_n; o++)
      for (int i = 0; i < ic_n; i++)
        for (int k = 0; k < k_n; k++) begin
          int v;
          v = (l == 0) ? cw1[o][i][k] : (l == 1) ? cw2[o][i][k] : cw3[o][i][k];
          if (v != 0) begin ri.push_back(o * ic_n + i); ci.push_back(k); d.push_back(v); end
        end
    nnz[l] = ri.size();
    begin
      int ria[];
      ria = new[nnz[l] + 1];
      for (int n = 0; n < nnz[l]; n++) ria[n] = ri[n];
      reps[l] = plan_reps(ic_n, oc_n, nnz[l], ria, n_ex[l], n_em[l]);
    end
    for (int n = 0; n < nnz[l]; n++) cfg_put(l, CFG_WEIGHT, n, coo_word(d[n], ri[n], ci[n]));
    for (int o = 0; o < oc_n; o++)
      for (int p = 0; p < w_n; p++) begin
        logic [63:0] pw;
        case (l)
          0: pw = param_word(alpha1[o][p], theta1[o][p], uth1[o][p]);
          1: pw = param_word(alpha2[o][p], theta2[o][p], uth2[o][p]);
          default: pw = param_word(alpha3[o][p], theta3[o][p], uth3[o][p]);
        endcase
        cfg_put(l, CFG_PARAM, o * w_n + p, pw);
      end
    cfg_put(l, CFG_REG, CFG_REG_NNZ, 64'(nnz[l]));
    cfg_put(l, CFG_REG, CFG_REG_T, 64'(T));
    cfg_put(l, CFG_REG, CFG_REG_REPS, 64'(reps[l]));
    $display("Conv%0d: %0d non-zero of %0d weights, REPS %0d (extra %0d, empty %0d)",
             l + 1, nnz[l], oc_n * ic_n * k_n, reps[l], n_ex[l], n_em[l]);
  endtask

  // ---------------- stimulus ----------------
  int mech_extra, mech_empty, mech_stall, mech_pool, mech_skip, mech_frame, mech_fifo_full;
  int got1, got2, got3, got4, got5;

  // Layer-output monitors: rows appear in timestep order, output-channel order.
  always @(posedge clk) if (rst_n) begin
    if (dut.c1_v && dut.c1_r) begin
      checks++;
      if (dut.c1_d !== e1[got1 / 16][got1 % 16]) begin
        failures++; if (failures < 10) $display("Conv1 t %0d oc %0d mismatch", got1 / 16, got1 % 16);
      end
      got1++;
    end
    if (dut.c2_v && dut.c2_r) begin
      checks++;
      if (dut.c2_d !== e2[got2 / 32][got2 % 32]) begin
        failures++; if (failures < 10) $display("Conv2 t %0d oc %0d mismatch", got2 / 32, got2 % 32);
      end
      if (dut.p2_d != dut.c2_d[63:0] && dut.c2_d != 0) mech_pool++;
      got2++;
    end
    if (dut.c3_v && dut.c3_r) begin
      checks++;
      if (dut.c3_d !== e3[got3 / 64][got3 % 64]) begin
        failures++; if (failures < 10) $display("Conv3 t %0d oc %0d mismatch", got3 / 64, got3 % 64);
      end
      got3++;
    end
    if (dut.d1_v && dut.d1_r) begin
      checks++;
      if (dut.d1_d !== e4[got4]) begin
        failures++; if (failures < 10) $display("FC1 t %0d mismatch", got4);
      end
      got4++;
    end
    if (dut.c1_v && !dut.c1_r) mech_fifo_full++;
  end

  // One workload: draw kernels at the densities DENS, configure, stream
  // FRAMES frames, compare, and measure cycles per timestep.
  task automatic run_workload(input string name);
    int t_start, t_end, t_prev, intervals, bottleneck;
    int facc0 [2];
    got1 = 0; got2 = 0; got3 = 0; got4 = 0; got5 = 0;
    intervals = 0; t_prev = 0;
    // kernels
    for (int o = 0; o < 16 + dyn; o++) for (int i = 0; i < 2 + dyn; i++) for (int k = 0; k < 11 + dyn; k++) cw1[o][i][k] = rweight(DENS[0]);
    for (int o = 0; o < 32 + dyn; o++) for (int i = 0; i < 16 + dyn; i++) for (int k = 0; k < 11 + dyn; k++) cw2[o][i][k] = rweight(DENS[1]);
    for (int o = 0; o < 64 + dyn; o++) for (int i = 0; i < 32 + dyn; i++) for (int k = 0; k < 5 + dyn; k++) cw3[o][i][k] = rweight(DENS[2]);
    for (int n = 0; n < 128 + dyn; n++) for (int i = 0; i < 2048 + dyn; i++) fw1[n][i] = rweight(DENS[3]);
    for (int n = 0; n < 11 + dyn; n++) for (int i = 0; i < 128 + dyn; i++) fw2[n][i] = rweight(DENS[4]);
    // Conv1: first output channel uses input channel 1 only -> empty iteration.
    for (int k = 0; k < 11 + dyn; k++) begin cw1[0][0][k] = 0; cw1[0][1][k] = 0; end
    cw1[0][1][3] = 250;
    // Conv2: first output channel only on input channel 9 -> empty iterations;
    // output channels 7 and 8 without weights -> extra iterations.
    for (int i = 0; i < 16 + dyn; i++) for (int k = 0; k < 11 + dyn; k++) begin
      if (i != 9) cw2[0][i][k] = 0;
      cw2[7][i][k] = 0; cw2[8][i][k] = 0;
    end
    cw2[0][9][5] = 300;
    // Conv3: output channels 0 and 40 without weights -> extra iterations.
    for (int i = 0; i < 32 + dyn; i++) for (int k = 0; k < 5 + dyn; k++) begin cw3[0][i][k] = 0; cw3[40][i][k] = 0; end
    // neuron parameters: alpha in [0.5, 1.0), theta and thresholds positive,
    // thresholds scaled with the expected input so that layers neither stay
    // silent nor fire everywhere
    for (int o = 0; o < 16 + dyn; o++) for (int p = 0; p < 128 + dyn; p++) begin alpha1[o][p] = 16384 + urand(16384); theta1[o][p] = 100 + urand(300); uth1[o][p] = (50 + urand(400)) * DENS[0] / 25; end
    for (int o = 0; o < 32 + dyn; o++) for (int p = 0; p < 128 + dyn; p++) begin alpha2[o][p] = 16384 + urand(16384); theta2[o][p] = 100 + urand(300); uth2[o][p] = (100 + urand(600)) * DENS[1] / 20; end
    for (int o = 0; o < 64 + dyn; o++) for (int p = 0; p < 64 + dyn; p++) begin alpha3[o][p] = 16384 + urand(16384); theta3[o][p] = 100 + urand(300); uth3[o][p] = (100 + urand(600)) * DENS[2] / 15; end
    for (int n = 0; n < 128 + dyn; n++) begin alpha4[n] = 16384 + urand(16384); theta4[n] = 200 + urand(500); uth4[n] = (500 + urand(3000)) * DENS[3] / 20; end
    for (int n = 0; n < 11 + dyn; n++) begin alpha5[n] = 16384 + urand(16384); theta5[n] = 200 + urand(500); uth5[n] = (1500 + urand(5000)) * DENS[4] / 25; end
    for (int t = 0; t < STEPS + dyn; t++) for (int i = 0; i < 2 + dyn; i++) for (int q = 0; q < 128 + dyn; q++) x0[t][i][q] = urand(100) < 50;
    reference();

    @(negedge clk); rst_n = 0; cfg = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int l = 0; l < 3 + dyn; l++) load_conv(l);
    for (int n = 0; n < 128 + dyn; n++)
      for (int i = 0; i < 2048 + dyn; i++) cfg_put(3, CFG_WEIGHT, n * 2048 + i, 64'(fw1[n][i] & 16'hFFFF));
    for (int n = 0; n < 11 + dyn; n++)
      for (int i = 0; i < 128 + dyn; i++) cfg_put(4, CFG_WEIGHT, n * 128 + i, 64'(fw2[n][i] & 16'hFFFF));
    for (int n = 0; n < 128 + dyn; n++) cfg_put(3, CFG_PARAM, n, param_word(alpha4[n], theta4[n], uth4[n]));
    for (int n = 0; n < 11 + dyn; n++)  cfg_put(4, CFG_PARAM, n, param_word(alpha5[n], theta5[n], uth5[n]));
    cfg_put(3, CFG_REG, CFG_REG_T, 64'(T));
    cfg_put(4, CFG_REG, CFG_REG_T, 64'(T));
    @(negedge clk); cfg.valid = 0;
    t_start = cyc;

    fork
      begin : drive
        for (int t = 0; t < STEPS + dyn; t++)
          for (int i = 0; i < 2 + dyn; i++) begin
            @(negedge clk);
            while (urand(4) == 0) begin in_valid = 0; @(negedge clk); end
            in_valid = 1;
            for (int q = 0; q < 128 + dyn; q++) in_data[q] = x0[t][i][q];
            @(posedge clk);
            while (!in_ready) @(posedge clk);
          end
        @(negedge clk); in_valid = 0;
      end
      begin : collect
        for (int t = 0; t < STEPS + dyn; t++) begin
          @(negedge clk); out_ready = urand(3) != 0;
          @(posedge clk);
          while (!(out_valid && out_ready)) begin
            @(negedge clk); out_ready = urand(3) != 0; @(posedge clk);
          end
          checks++;
          if (out_data !== e5[t]) begin
            failures++; $display("%s: class spikes t %0d got %b exp %b", name, t, out_data, e5[t]);
          end
          if (t >= 2) intervals += cyc - t_prev;
          t_prev = cyc;
          got5++;
        end
      end
    join
    t_end = cyc;
    repeat (5) @(negedge clk);

    for (int l = 0; l < 3 + dyn; l++) begin
      checks += 3;
      if (conv_n_extra[l] != 32'(STEPS * n_ex[l])) begin failures++; $display("Conv%0d extra %0d", l+1, conv_n_extra[l]); end
      if (conv_n_empty[l] != 32'(STEPS * n_em[l])) begin failures++; $display("Conv%0d empty %0d", l+1, conv_n_empty[l]); end
      if (conv_n_acc[l] != 32'(exp_cacc[l])) begin failures++; $display("Conv%0d acc %0d exp %0d", l+1, conv_n_acc[l], exp_cacc[l]); end
      mech_extra += conv_n_extra[l]; mech_empty += conv_n_empty[l]; mech_stall += conv_n_stall[l];
    end
    for (int l = 0; l < 2 + dyn; l++) begin
      checks++;
      if (fc_n_acc[l] != 32'(exp_facc[l])) begin failures++; $display("FC%0d fetches %0d exp %0d", l+1, fc_n_acc[l], exp_facc[l]); end
    end
    facc0[0] = STEPS * 128 * 2048; facc0[1] = STEPS * 11 * 128;
    mech_skip  += facc0[0] + facc0[1] - int'(fc_n_acc[0] + fc_n_acc[1]);
    mech_frame += (conv_n_steps[0] >= 32'(T + 1)) ? FRAMES - 1 : 0;
    checks++;
    if (got1 != STEPS * 16 || got2 != STEPS * 32 || got3 != STEPS * 64 || got4 != STEPS || got5 != STEPS) begin
      failures++; $display("row counts %0d %0d %0d %0d %0d", got1, got2, got3, got4, got5);
    end
    // Throughput: in steady state one timestep leaves every max(REPS, FC1)
    // cycles; the random input gaps and output stalls may add a little.
    bottleneck = 64 * (1 + 16) + 1;
    for (int l = 0; l < 3 + dyn; l++) if (reps[l] > bottleneck) bottleneck = reps[l];
    checks++;
    if (intervals < (STEPS - 2) * bottleneck - 50 || intervals > (STEPS - 2) * (bottleneck + bottleneck / 10 + 40)) begin
      failures++; $display("%s: %0d cycles per timestep, expected about %0d", name, intervals / (STEPS - 2), bottleneck);
    end
    // Accumulations against a dense sliding window that accumulates every
    // weight under every input spike (the ratio follows the weight density).
    for (int l = 1; l < 3; l++) begin
      real ratio;
      ratio = real'(conv_n_acc[l]) / real'(dense_cacc[l]);
      checks++;
      if (ratio > real'(DENS[l]) / 100.0 + 0.05 || ratio < real'(DENS[l]) / 100.0 - 0.12) begin
        failures++; $display("%s: Conv%0d accumulation ratio %f", name, l + 1, ratio);
      end
    end
    $display("%-22s REPS %0d/%0d/%0d, %0d cycles per timestep (bottleneck %0d), accumulations vs dense %5.1f%% %5.1f%% %5.1f%%, FC1 fetches %5.1f%% of dense",
             name, reps[0], reps[1], reps[2], intervals / (STEPS - 2), bottleneck,
             100.0 * real'(conv_n_acc[0]) / real'(dense_cacc[0]), 100.0 * real'(conv_n_acc[1]) / real'(dense_cacc[1]),
             100.0 * real'(conv_n_acc[2]) / real'(dense_cacc[2]), 100.0 * real'(fc_n_acc[0]) / real'(facc0[0]));
    $display("%-22s class spikes of the last timestep %b, %0d cycles for %0d timesteps", name, e5[STEPS-1], t_end - t_start, STEPS);
  endtask

  task automatic set_dens(input int d1, d2, d3, d4, d5);
    DENS[0] = d1; DENS[1] = d2; DENS[2] = d3; DENS[3] = d4; DENS[4] = d5;
  endtask

  initial begin
    dyn = 0;
    cfg = '0; in_valid = 0; in_data = '0; out_ready = 0;
    mech_extra = 0; mech_empty = 0; mech_stall = 0; mech_pool = 0; mech_skip = 0; mech_frame = 0;
    mech_fifo_full = 0;
    // Densities of the published sweeps: the two per-layer mixes, the uniform
    // 100 ... 5 % designs and the 10 % steps of the spatial-sparsity sweep.
    for (int w = 0; w < 16 + dyn; w++) begin
      int d;
      case (w)
        0: d = 0;  1: d = 0;  2: d = 5;   3: d = 100; 4: d = 90;  5: d = 80;
        6: d = 75; 7: d = 70; 8: d = 60;  9: d = 50;  10: d = 40; 11: d = 30;
        12: d = 25; 13: d = 20; 14: d = 15; default: d = 10;
      endcase
      if (w == 0)      set_dens(25, 20, 15, 20, 25);
      else if (w == 1) set_dens(20, 15, 10, 15, 20);
      else             set_dens(d, d, d, d, d);
      run_workload($sformatf("SAOCDS %0d-%0d-%0d-%0d-%0d", DENS[0], DENS[1], DENS[2], DENS[3], DENS[4]));
    end

    $display("mechanisms: extra %0d, empty %0d, conv stall cycles %0d, FIFO full %0d, pooled rows %0d, skipped FC fetches %0d, frame restarts %0d",
             mech_extra, mech_empty, mech_stall, mech_fifo_full, mech_pool, mech_skip, mech_frame);
    checks += 7;
    if (mech_extra == 0) begin failures++; $display("no extra iteration"); end
    if (mech_empty == 0) begin failures++; $display("no empty iteration"); end
    if (mech_stall == 0) begin failures++; $display("no stall"); end
    if (mech_fifo_full == 0) begin failures++; $display("no back-pressure"); end
    if (mech_pool == 0) begin failures++; $display("pooling never seen"); end
    if (mech_skip == 0) begin failures++; $display("no skipped fetch"); end
    if (mech_frame == 0) begin failures++; $display("no frame restart"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
