// tb_neuron_param_mem: writes the parameters of every neuron one at a time
// and checks that each row read returns all its lanes, i.e. that a write to
// one lane does not disturb the others.
module tb_neuron_param_mem;
  import saocds_pkg::*;
  localparam int ROWS = 5, LANES = 6;
  logic clk = 0;
  logic we;
  logic [2:0] wrow, rrow;
  logic [2:0] wlane;
  neuron_param_t wparam;
  neuron_param_t [LANES-1:0] rparams;
  neuron_param_t model [ROWS][LANES];
  int checks = 0, failures = 0;

  neuron_param_mem #(.ROWS(ROWS), .LANES(LANES)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    we = 0; wrow = 0; rrow = 0; wlane = 0; wparam = '0;
    for (int pass = 0; pass < 2; pass++)
      for (int r = 0; r < ROWS; r++)
        for (int l = 0; l < LANES; l++) begin
          @(negedge clk); we = 1; wrow = 3'(r); wlane = 3'(l);
          wparam = neuron_param_t'({$urandom, $urandom}); model[r][l] = wparam;
        end
    @(negedge clk); we = 0;
    for (int r = 0; r < ROWS; r++) begin
      rrow = 3'(r); #1;
      for (int l = 0; l < LANES; l++) begin
        checks++;
        if (rparams[l] !== model[r][l]) begin failures++; $display("row %0d lane %0d", r, l); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
