// tb_conv_input_buffer: writes random rows into every input channel and reads
// them back padded: bits PAD .. PAD+W_IN-1 must hold the row and the PAD bits
// at each end must be 0. Also checks the same-cycle bypass of a row being
// written and that writing one row leaves the others unchanged.
module tb_conv_input_buffer;
  import saocds_tb_pkg::*;
  localparam int IC = 4, W_IN = 20, PAD = 3, PADW = W_IN + 2*PAD;
  logic clk = 0;
  logic we;
  logic [1:0] waddr, raddr;
  logic [W_IN-1:0] wdata;
  logic [PADW-1:0] rdata;
  logic [W_IN-1:0] model [IC];
  int checks = 0, failures = 0;

  conv_input_buffer #(.IC(IC), .W_IN(W_IN), .PAD(PAD)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic check_row(input int r);
    logic [PADW-1:0] exp;
    exp = '0;
    for (int j = 0; j < W_IN; j++) exp[j + PAD] = model[r][j];
    checks++;
    if (rdata !== exp) begin failures++; $display("row %0d got %h exp %h", r, rdata, exp); end
  endtask

  initial begin
    we = 0; waddr = 0; raddr = 0; wdata = 0;
    for (int r = 0; r < IC; r++) begin
      @(negedge clk); we = 1; waddr = 2'(r); wdata = W_IN'($urandom); model[r] = wdata;
    end
    @(negedge clk); we = 0;
    repeat (200) begin
      @(negedge clk);
      we = urand(2) == 1; waddr = 2'($urandom); wdata = W_IN'($urandom);
      raddr = 2'($urandom);
      #1;
      if (we && waddr == raddr) begin
        logic [W_IN-1:0] keep;
        keep = model[raddr]; model[raddr] = wdata; check_row(raddr); model[raddr] = keep;
      end else check_row(raddr);
      @(posedge clk); if (we) model[waddr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
