// tb_lif_threshold: signed comparison U > U_th per lane, including U equal
// to the threshold (no spike), negative thresholds and negative potentials.
module tb_lif_threshold;
  import saocds_pkg::*;
  import saocds_tb_pkg::*;
  localparam int LANES = 8;
  vmem_t [LANES-1:0] u;
  neuron_param_t [LANES-1:0] params;
  logic [LANES-1:0] spk;
  int checks = 0, failures = 0;

  lif_threshold #(.LANES(LANES)) dut (.*);

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int it = 0; it < 400; it++) begin
      for (int l = 0; l < LANES; l++) begin
        int th, uu;
        th = wrap24(urand(2000)) - 1000;
        case (urand(3))
          0: uu = th;
          1: uu = th + 1;
          default: uu = wrap24(urand(4000)) - 2000;
        endcase
        u[l] = vmem_t'(uu);
        params[l] = neuron_param_t'(param_word(int'($urandom), 0, th));
      end
      #1;
      for (int l = 0; l < LANES; l++) begin
        checks++;
        if (spk[l] != (int'(u[l]) > int'(params[l].u_th))) begin
          failures++; $display("lane %0d u=%0d th=%0d spk=%0d", l, u[l], params[l].u_th, spk[l]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
