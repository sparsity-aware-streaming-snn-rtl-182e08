// tb_fc_weight_mem: first the weight-mask example of the paper (weights
// 0x0000, 0x4567, 0x89ab, 0x0000 for inputs 0-3, mask 0 1 1 0, input spikes
// 1 1 0 1, fetch mask 0 1 0 0: only 0x4567 is fetched); then random weights
// (about half of them zero) written one by one and read back per group and
// chunk: the mask must be W != 0 and a weight must read as 0 unless fetched.
module tb_fc_weight_mem;
  import saocds_tb_pkg::*;
  import saocds_pkg::*;
  localparam int N_IN = 16, N_OUT = 6, SIMD = 4, PE = 2, NG = 3, NK = 4;
  logic clk = 0;
  logic we;
  logic [2:0] wneuron;
  logic [3:0] winput;
  weight_t wdata;
  logic [1:0] rgroup, rchunk;
  logic [PE*SIMD-1:0] fetch, rmask;
  weight_t [PE*SIMD-1:0] rw;
  int model [N_OUT][N_IN];
  int checks = 0, failures = 0;

  fc_weight_mem #(.N_IN(N_IN), .N_OUT(N_OUT), .SIMD(SIMD), .PE(PE)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [3:0] ifm, fm;
    we = 0; wneuron = 0; winput = 0; wdata = 0; rgroup = 0; rchunk = 0; fetch = '0;
    for (int n = 0; n < N_OUT; n++)
      for (int i = 0; i < N_IN; i++) begin
        @(negedge clk); we = 1; wneuron = 3'(n); winput = 4'(i);
        model[n][i] = urand(2) ? 0 : urand(65536) - 32768;
        wdata = weight_t'(model[n][i]);
      end
    // Paper example on neuron 1, inputs 0..3 (chunk 0, group 0, lane 1*SIMD + i).
    begin
      int ex[4] = '{0, 'h4567, 'h89ab, 0};
      for (int i = 0; i < 4; i++) begin
        @(negedge clk); we = 1; wneuron = 3'd1; winput = 4'(i); wdata = weight_t'(ex[i]);
        model[1][i] = int'(weight_t'(ex[i]));
      end
    end
    @(negedge clk); we = 0;
    rgroup = 0; rchunk = 0; ifm = 4'b1011;  // I0=1 I1=1 I2=0 I3=1
    fetch = '0; #1;
    fm = ifm & rmask[SIMD +: SIMD];
    checks++;
    if (rmask[SIMD +: SIMD] !== 4'b0110) begin failures++; $display("mask %b", rmask[SIMD +: SIMD]); end
    checks++;
    if (fm !== 4'b0010) begin failures++; $display("fetch mask %b", fm); end
    fetch[SIMD +: SIMD] = fm; #1;
    checks++;
    if (rw[SIMD+1] !== 16'h4567 || rw[SIMD+0] !== 0 || rw[SIMD+2] !== 0 || rw[SIMD+3] !== 0) begin
      failures++; $display("fetched %h %h %h %h", rw[SIMD+0], rw[SIMD+1], rw[SIMD+2], rw[SIMD+3]);
    end
    // Random reads.
    repeat (300) begin
      @(negedge clk);
      rgroup = 2'(urand(NG)); rchunk = 2'(urand(NK)); fetch = (PE*SIMD)'($urandom);
      #1;
      for (int p = 0; p < PE; p++)
        for (int s = 0; s < SIMD; s++) begin
          int n, i, l;
          n = int'(rgroup) * PE + p; i = int'(rchunk) * SIMD + s; l = p * SIMD + s;
          checks++;
          if (rmask[l] != (model[n][i] != 0) ||
              int'(rw[l]) != (fetch[l] ? model[n][i] : 0)) begin
            failures++; $display("n %0d i %0d", n, i);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
