// tb_goap_accum: first the paper's GOAP example (two input channels of six
// padded inputs, weights a at column 1 of channel 0, b at column 0 and c at
// column 2 of channel 1, four outputs), whose printed result is c, a+b, b,
// a+c with 2 + 2 + 2 accumulations; then random rows, columns and weights
// checked against a direct sum.
module tb_goap_accum;
  import saocds_tb_pkg::*;
  import saocds_pkg::*;
  localparam int OI = 4, PADW = 6, CI_W = 2;
  logic [PADW-1:0] row;
  logic [CI_W-1:0] ci;
  weight_t d;
  vmem_t [OI-1:0] base, acc;
  logic [$clog2(OI+1)-1:0] n_acc;
  int checks = 0, failures = 0;

  goap_accum #(.OI(OI), .PADW(PADW), .CI_W(CI_W)) dut (.*);

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int a, b, c, total;
    vmem_t [OI-1:0] v;
    a = 100; b = 20; c = 3; total = 0;
    // Channel rows from the GOAP figure, leftmost printed cell = index 0.
    // channel 0: 1 0 1 0 1 0 ; channel 1: 0 1 1 0 0 1
    v = '0;
    row = 6'b010101; ci = 2'd1; d = weight_t'(a); base = v; #1; v = acc; total += n_acc;
    row = 6'b100110; ci = 2'd0; d = weight_t'(b); base = v; #1; v = acc; total += n_acc;
    row = 6'b100110; ci = 2'd2; d = weight_t'(c); base = v; #1; v = acc; total += n_acc;
    checks++;
    if (!(v[0] == vmem_t'(c) && v[1] == vmem_t'(a+b) && v[2] == vmem_t'(b) && v[3] == vmem_t'(a+c))) begin
      failures++; $display("GOAP example got %0d %0d %0d %0d", v[0], v[1], v[2], v[3]);
    end
    checks++;
    if (total != 6) begin failures++; $display("GOAP example accumulations %0d", total); end
    for (int it = 0; it < 500; it++) begin
      int cnt;
      row = PADW'($urandom); ci = CI_W'(urand((PADW - OI + 1))); d = weight_t'($urandom);
      for (int i = 0; i < OI; i++) base[i] = vmem_t'($urandom);
      #1;
      cnt = 0;
      for (int i = 0; i < OI; i++) begin
        vmem_t e;
        e = base[i] + (row[i + int'(ci)] ? vmem_t'(d) : '0);
        cnt += row[i + int'(ci)];
        checks++;
        if (acc[i] !== e) begin failures++; $display("lane %0d", i); end
      end
      checks++;
      if (int'(n_acc) != cnt) begin failures++; $display("n_acc %0d exp %0d", n_acc, cnt); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
