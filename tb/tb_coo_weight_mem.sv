// tb_coo_weight_mem: fills the COO memory with random {D, RI, CI} entries
// (Layer-1 widths 16 + 5 + 4 bits) and reads them back through both read
// ports at random addresses.
module tb_coo_weight_mem;
  import saocds_tb_pkg::*;
  localparam int DEPTH = 352, RI_W = 5, CI_W = 4, D_W = 16, EW = D_W + RI_W + CI_W, AW = 9;
  logic clk = 0;
  logic we;
  logic [AW-1:0] waddr, raddr0, raddr1;
  logic [EW-1:0] wentry, rentry0, rentry1;
  logic [EW-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  coo_weight_mem #(.DEPTH(DEPTH), .RI_W(RI_W), .CI_W(CI_W), .D_W(D_W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    we = 0; waddr = 0; raddr0 = 0; raddr1 = 0; wentry = 0;
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk); we = 1; waddr = AW'(i); wentry = EW'($urandom); model[i] = wentry;
    end
    @(negedge clk); we = 0;
    repeat (500) begin
      @(negedge clk);
      raddr0 = AW'(urand(DEPTH)); raddr1 = AW'(urand(DEPTH));
      #1;
      checks += 2;
      if (rentry0 !== model[raddr0]) begin failures++; $display("port0 @%0d", raddr0); end
      if (rentry1 !== model[raddr1]) begin failures++; $display("port1 @%0d", raddr1); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
