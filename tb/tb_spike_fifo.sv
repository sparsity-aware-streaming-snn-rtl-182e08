// tb_spike_fifo: random traffic through the FIFO with random stalls on both
// sides; every word read must be the next word written (scoreboard queue),
// the FIFO must fill to DEPTH and no more, and a full-rate stream must pass
// one word per cycle.
module tb_spike_fifo;
  import saocds_tb_pkg::*;
  localparam int W = 16, D = 3;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [W-1:0] in_data, out_data;
  int checks = 0, failures = 0;
  logic [W-1:0] q[$];
  int n_out = 0, maxcnt = 0, cnt = 0;

  spike_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      checks++;
      if (q.size() == 0 || out_data != q[0]) begin
        failures++;
        $display("mismatch got %h exp %h", out_data, q.size() ? q[0] : '0);
      end
      if (q.size()) void'(q.pop_front());
      n_out++;
    end
    if (in_valid && in_ready) q.push_back(in_data);
    cnt = q.size();
    if (cnt > maxcnt) maxcnt = cnt;
  end

  initial begin
    in_valid = 0; out_ready = 0; in_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // phase 1: random stalls
    repeat (2000) begin
      @(negedge clk);
      if (!in_valid || in_ready) begin
        in_valid = urand(3) != 0;
        in_data  = W'($urandom);
      end
      out_ready = urand(3) == 0 ? 1'b0 : 1'b1;
      if (urand(50) == 0) out_ready = 0;
    end
    // phase 2: fill with reader stopped
    @(negedge clk); out_ready = 0; in_valid = 1;
    repeat (10) begin @(negedge clk); in_data = W'($urandom); end
    checks++;
    if (in_ready !== 1'b0) begin failures++; $display("full FIFO accepts data"); end
    // phase 3: full rate
    begin
      int n0, cyc;
      out_ready = 1;
      @(negedge clk);
      n0 = n_out;
      repeat (100) begin @(negedge clk); in_data = W'($urandom); end
      cyc = n_out - n0;
      checks++;
      if (cyc != 100) begin failures++; $display("rate %0d/100", cyc); end
    end
    in_valid = 0;
    repeat (10) @(negedge clk);
    checks++;
    if (maxcnt != D) begin failures++; $display("max occupancy %0d", maxcnt); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
