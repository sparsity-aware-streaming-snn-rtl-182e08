// tb_wm_fc_layer: the weight-mask FC layer at reduced size (16 inputs in two
// 8-bit rows, 6 neurons, SIMD 4, PE 2) over several timesteps and frames.
// Random weights at about 40% density and random input spikes; reference is
// a dense matrix-vector product followed by the LIF equation in integer
// arithmetic. Checked: each output row, the number of fetched weights (only
// non-zero weights whose input spiked), and, with free-flowing streams, the
// fixed time per timestep NB * (1 + NCH * NG) + 1 cycles whatever the
// sparsity.
module tb_wm_fc_layer;
  import saocds_pkg::*;
  import saocds_tb_pkg::*;
  localparam int N_IN = 16, N_OUT = 6, IN_BEAT = 8, SIMD = 4, PE = 2;
  localparam int NB = N_IN / IN_BEAT, NCH = IN_BEAT / SIMD, NG = N_OUT / PE;
  localparam int T = 3, FRAMES = 3, STEPS = T * FRAMES;

  logic clk = 0, rst_n = 0;
  cfg_t cfg;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [IN_BEAT-1:0] in_data;
  logic [N_OUT-1:0] out_data;
  logic [31:0] n_iter, n_acc, n_steps;

  wm_fc_layer #(.N_IN(N_IN), .N_OUT(N_OUT), .IN_BEAT(IN_BEAT), .SIMD(SIMD), .PE(PE), .LAYER_ID(3)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    #5000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int w [N_OUT][N_IN];
  int alpha [N_OUT], theta [N_OUT], uth [N_OUT];
  bit x [STEPS][N_IN];
  logic [N_OUT-1:0] exp_row [STEPS];
  int exp_fetch;

  task automatic cfg_write(input cfg_target_e tg, input int addr, input logic [63:0] data);
    @(negedge clk);
    cfg.valid = 1; cfg.layer = 3'd3; cfg.target = tg; cfg.addr = CFG_ADDR_W'(addr); cfg.data = data;
    @(negedge clk); cfg.valid = 0;
  endtask

  task automatic run(input bit stalls);
    int u [N_OUT]; bit s [N_OUT];
    int last_out, intervals_bad;
    for (int n = 0; n < N_OUT; n++) begin
      for (int i = 0; i < N_IN; i++) w[n][i] = (urand(100) < 40) ? urand(2001) - 1000 : 0;
      alpha[n] = 20000 + urand(12000); theta[n] = 100 + urand(400); uth[n] = urand(600) - 100;
    end
    for (int t = 0; t < STEPS; t++) for (int i = 0; i < N_IN; i++) x[t][i] = urand(100) < 50;
    exp_fetch = 0;
    for (int t = 0; t < STEPS; t++)
      for (int n = 0; n < N_OUT; n++) begin
        int v;
        v = ((t % T) == 0) ? 0 : leak_ref(u[n], s[n], alpha[n], theta[n]);
        for (int i = 0; i < N_IN; i++)
          if (x[t][i] && w[n][i] != 0) begin v = wrap24(longint'(v) + w[n][i]); exp_fetch++; end
        u[n] = v; s[n] = v > uth[n]; exp_row[t][n] = s[n];
      end
    @(negedge clk); rst_n = 0; @(negedge clk); rst_n = 1;
    for (int n = 0; n < N_OUT; n++)
      for (int i = 0; i < N_IN; i++) cfg_write(CFG_WEIGHT, n * N_IN + i, 64'(w[n][i] & 16'hFFFF));
    for (int n = 0; n < N_OUT; n++) cfg_write(CFG_PARAM, n, param_word(alpha[n], theta[n], uth[n]));
    cfg_write(CFG_REG, CFG_REG_T, 64'(T));
    last_out = -1; intervals_bad = 0;
    fork
      begin
        for (int t = 0; t < STEPS; t++)
          for (int b = 0; b < NB; b++) begin
            @(negedge clk);
            while (stalls && urand(3) == 0) begin in_valid = 0; @(negedge clk); end
            in_valid = 1;
            for (int j = 0; j < IN_BEAT; j++) in_data[j] = x[t][b * IN_BEAT + j];
            @(posedge clk);
            while (!in_ready) @(posedge clk);
          end
        @(negedge clk); in_valid = 0;
      end
      begin
        for (int t = 0; t < STEPS; t++) begin
          @(negedge clk); out_ready = stalls ? (urand(2) == 0) : 1'b1;
          @(posedge clk);
          while (!(out_valid && out_ready)) begin
            @(negedge clk); out_ready = stalls ? (urand(2) == 0) : 1'b1; @(posedge clk);
          end
          checks++;
          if (out_data !== exp_row[t]) begin
            failures++; $display("t %0d got %b exp %b", t, out_data, exp_row[t]);
          end
          if (!stalls && last_out >= 0 && cyc - last_out != NB * (1 + NCH * NG) + 1) begin
            intervals_bad++; $display("interval %0d", cyc - last_out);
          end
          last_out = cyc;
        end
      end
    join
    @(negedge clk);
    checks += 3;
    if (n_acc != 32'(exp_fetch)) begin failures++; $display("fetches %0d exp %0d", n_acc, exp_fetch); end
    if (n_steps != 32'(STEPS)) begin failures++; $display("steps %0d", n_steps); end
    if (intervals_bad != 0) failures++;
    $display("stalls %0d: %0d fetched weights of %0d dense", stalls, exp_fetch, STEPS * N_IN * N_OUT);
  endtask

  initial begin
    cfg = '0; in_valid = 0; in_data = '0; out_ready = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(0);
    run(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
