// tb_neuron_state_mem: random row writes of potentials and spikes, random
// row reads compared with a model of the memory.
module tb_neuron_state_mem;
  import saocds_tb_pkg::*;
  import saocds_pkg::*;
  localparam int ROWS = 8, LANES = 4;
  logic clk = 0;
  logic we;
  logic [2:0] wrow, rrow;
  vmem_t [LANES-1:0] wv, rv;
  logic [LANES-1:0] ws, rs;
  vmem_t [LANES-1:0] mv [ROWS];
  logic [LANES-1:0] ms [ROWS];
  bit written [ROWS];
  int checks = 0, failures = 0;

  neuron_state_mem #(.ROWS(ROWS), .LANES(LANES)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    we = 0; wrow = 0; rrow = 0; wv = '0; ws = '0;
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk); we = 1; wrow = 3'(r);
      for (int l = 0; l < LANES; l++) wv[l] = vmem_t'($urandom);
      ws = LANES'($urandom); mv[r] = wv; ms[r] = ws;
    end
    repeat (300) begin
      @(negedge clk);
      we = urand(2) == 1; wrow = 3'($urandom); rrow = 3'($urandom);
      for (int l = 0; l < LANES; l++) wv[l] = vmem_t'($urandom);
      ws = LANES'($urandom);
      #1;
      checks++;
      if (rv !== mv[rrow] || rs !== ms[rrow]) begin failures++; $display("row %0d", rrow); end
      @(posedge clk); if (we) begin mv[wrow] = wv; ms[wrow] = ws; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
