// tb_lif_leak: random potentials, spikes and parameters; each lane must give
// alpha * u - theta * s (alpha Q1.15, rounded down, 24-bit wrap) computed
// with integer arithmetic in the testbench, and 0 at the first timestep.
// Includes the corner values alpha = 1.0 and alpha = 0, negative potentials
// and both spike values.
module tb_lif_leak;
  import saocds_pkg::*;
  import saocds_tb_pkg::*;
  localparam int LANES = 8;
  logic first_step;
  vmem_t [LANES-1:0] u, u_leak;
  logic [LANES-1:0] s;
  neuron_param_t [LANES-1:0] params;
  int checks = 0, failures = 0;

  lif_leak #(.LANES(LANES)) dut (.*);

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int it = 0; it < 400; it++) begin
      first_step = (it % 10) == 3;
      for (int l = 0; l < LANES; l++) begin
        int a, th, uu;
        uu = wrap24($urandom);
        a  = (l == 0) ? 32768 : (l == 1) ? 0 : urand(65536);
        th = wrap24(urand(4096));
        u[l] = vmem_t'(uu); s[l] = 1'($urandom);
        params[l] = neuron_param_t'(param_word(a, th, 0));
      end
      #1;
      for (int l = 0; l < LANES; l++) begin
        int exp;
        exp = first_step ? 0 : leak_ref(int'(u[l]), s[l], int'(params[l].alpha), int'(params[l].theta));
        checks++;
        if (int'(u_leak[l]) != exp) begin
          failures++;
          $display("lane %0d u=%0d s=%0d a=%0d got %0d exp %0d", l, u[l], s[l], params[l].alpha, u_leak[l], exp);
        end
      end
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
