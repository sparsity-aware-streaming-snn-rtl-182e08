// tb_saocds_conv_layer: end-to-end test of one SAOCDS convolution layer at
// reduced size (3 input channels, 5 output channels, kernel 3, width 8).
//
// For each case the testbench draws a random kernel at a given density, forces
// the patterns that need the paper's supplementary iterations (an output
// channel without weights -> extra iterations; the first output channel with
// weights only on a late input channel -> empty iterations), packs the
// non-zero weights in COO format in output-channel order, plans REPS offline
// and loads everything through the configuration bus. Random input spikes are
// streamed for T timesteps. The reference is an ordinary sliding-window
// convolution followed by the LIF equation, written with integer arithmetic.
// Checked: every output row in order, the numbers of extra and empty
// iterations and of accumulations, and, in the cases without stalls, that
// T timesteps take exactly T * REPS cycles (one iteration per clock).
module tb_saocds_conv_layer;
  import saocds_pkg::*;
  import saocds_tb_pkg::*;
  localparam int IC = 3, OC = 5, K = 3, W_IN = 8, PAD = 1;
  localparam int OI = W_IN + 2*PAD - K + 1;
  localparam int TMAX = 6;

  logic clk = 0, rst_n = 0;
  cfg_t cfg;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [W_IN-1:0] in_data;
  logic [OI-1:0] out_data;
  logic [31:0] n_iter, n_acc, n_extra, n_empty, n_stall, n_steps;

  saocds_conv_layer #(.IC(IC), .OC(OC), .K(K), .W_IN(W_IN), .PAD(PAD), .LAYER_ID(2)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    #5000000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // test data
  int w [OC][IC][K];
  int alpha [OC][OI], theta [OC][OI], uth [OC][OI];
  bit in_bits [TMAX][IC][W_IN];
  logic [OI-1:0] exp_rows [TMAX][OC];
  int exp_acc;

  task automatic cfg_write(input cfg_target_e tg, input int addr, input logic [63:0] data);
    @(negedge clk);
    cfg.valid = 1; cfg.layer = 3'd2; cfg.target = tg; cfg.addr = CFG_ADDR_W'(addr); cfg.data = data;
    @(negedge clk);
    cfg.valid = 0;
  endtask

  task automatic run_case(input int density_pct, input int T, input bit stalls,
                          input bit force_extra, input bit force_empty);
    int ri[$], ci[$], d[$];
    int nnz, reps, n_ex, n_em;
    int u [OC][OI];
    bit s [OC][OI];
    int t_first, t_last, got_rows;
    // kernel
    for (int o = 0; o < OC; o++)
      for (int i = 0; i < IC; i++)
        for (int k = 0; k < K; k++)
          w[o][i][k] = (urand(100) < density_pct) ? (urand(401) - 200) : 0;
    if (force_extra) for (int i = 0; i < IC; i++) for (int k = 0; k < K; k++) w[3][i][k] = 0;
    if (force_empty) begin
      for (int i = 0; i < IC; i++) for (int k = 0; k < K; k++) w[0][i][k] = 0;
      w[0][IC-1][1] = 77;
    end
    // COO, output-channel order
    for (int o = 0; o < OC; o++)
      for (int i = 0; i < IC; i++)
        for (int k = 0; k < K; k++)
          if (w[o][i][k] != 0) begin ri.push_back(o*IC + i); ci.push_back(k); d.push_back(w[o][i][k]); end
    nnz = ri.size();
    begin
      int ria[];
      ria = new[nnz + 1];
      for (int n = 0; n < nnz; n++) ria[n] = ri[n];
      reps = plan_reps(IC, OC, nnz, ria, n_ex, n_em);
    end
    // parameters
    for (int o = 0; o < OC; o++)
      for (int p = 0; p < OI; p++) begin
        alpha[o][p] = 16384 + urand(16385);
        theta[o][p] = 50 + urand(200);
        uth[o][p]   = urand(300) - 50;
      end
    // inputs
    for (int t = 0; t < T; t++)
      for (int i = 0; i < IC; i++)
        for (int x = 0; x < W_IN; x++) in_bits[t][i][x] = urand(100) < 40;
    // reference: sliding window + LIF
    exp_acc = 0;
    for (int t = 0; t < T; t++)
      for (int o = 0; o < OC; o++)
        for (int p = 0; p < OI; p++) begin
          int v;
          v = (t == 0) ? 0 : leak_ref(u[o][p], s[o][p], alpha[o][p], theta[o][p]);
          for (int i = 0; i < IC; i++)
            for (int k = 0; k < K; k++) begin
              int x;
              x = p + k - PAD;
              if (x >= 0 && x < W_IN && in_bits[t][i][x] && w[o][i][k] != 0) begin
                v = wrap24(longint'(v) + w[o][i][k]);
                exp_acc++;
              end
            end
          u[o][p] = v; s[o][p] = v > uth[o][p];
          exp_rows[t][o][p] = s[o][p];
        end
    // reset and configure
    @(negedge clk); rst_n = 0; @(negedge clk); rst_n = 1;
    for (int n = 0; n < nnz; n++) cfg_write(CFG_WEIGHT, n, coo_word(d[n], ri[n], ci[n]));
    for (int o = 0; o < OC; o++)
      for (int p = 0; p < OI; p++) cfg_write(CFG_PARAM, o*OI + p, param_word(alpha[o][p], theta[o][p], uth[o][p]));
    cfg_write(CFG_REG, CFG_REG_NNZ, 64'(nnz));
    cfg_write(CFG_REG, CFG_REG_T, 64'(T));
    cfg_write(CFG_REG, CFG_REG_REPS, 64'(reps));
    // stream
    t_first = -1; t_last = -1; got_rows = 0;
    fork
      begin : drive
        for (int t = 0; t < T; t++)
          for (int i = 0; i < IC; i++) begin
            @(negedge clk);
            while (stalls && urand(3) == 0) begin in_valid = 0; @(negedge clk); end
            in_valid = 1;
            for (int x = 0; x < W_IN; x++) in_data[x] = in_bits[t][i][x];
            @(posedge clk);
            while (!in_ready) @(posedge clk);
            if (t_first < 0) t_first = cyc;
          end
        @(negedge clk); in_valid = 0;
      end
      begin : monitor
        for (int t = 0; t < T; t++)
          for (int o = 0; o < OC; o++) begin
            @(negedge clk);
            out_ready = stalls ? (urand(3) != 0) : 1'b1;
            @(posedge clk);
            while (!(out_valid && out_ready)) begin
              @(negedge clk); out_ready = stalls ? (urand(3) != 0) : 1'b1; @(posedge clk);
            end
            checks++; got_rows++;
            if (out_data !== exp_rows[t][o]) begin
              failures++; $display("t %0d oc %0d got %b exp %b", t, o, out_data, exp_rows[t][o]);
            end
            t_last = cyc;
          end
      end
    join
    @(negedge clk);
    checks += 4;
    if (n_extra != 32'(T * n_ex)) begin failures++; $display("extra %0d exp %0d", n_extra, T*n_ex); end
    if (n_empty != 32'(T * n_em)) begin failures++; $display("empty %0d exp %0d", n_empty, T*n_em); end
    if (n_acc != 32'(exp_acc)) begin failures++; $display("acc %0d exp %0d", n_acc, exp_acc); end
    if (n_steps != 32'(T)) begin failures++; $display("steps %0d", n_steps); end
    if (!stalls) begin
      checks++;
      if (t_last - t_first + 1 != T * reps) begin
        failures++; $display("cycles %0d exp %0d", t_last - t_first + 1, T * reps);
      end
    end
    $display("case density %0d%% T %0d stalls %0d: nnz %0d reps %0d extra %0d empty %0d, %0d cycles",
             density_pct, T, stalls, nnz, reps, n_ex, n_em, t_last - t_first + 1);
    if (force_extra) begin checks++; if (n_ex == 0) begin failures++; $display("no extra iteration"); end end
    if (force_empty) begin checks++; if (n_em == 0) begin failures++; $display("no empty iteration"); end end
  endtask

  initial begin
    cfg = '0; in_valid = 0; in_data = '0; out_ready = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_case(100, 3, 0, 0, 0);
    run_case(50, 4, 0, 1, 1);
    run_case(30, 5, 1, 1, 1);
    run_case(15, 6, 1, 1, 0);
    run_case(70, 4, 1, 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
