// tb_spike_maxpool: random spike rows; output bit j must be the OR of input
// bits 2j and 2j+1; valid and ready must pass through.
module tb_spike_maxpool;
  localparam int W_IN = 16, POOL = 2;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [W_IN-1:0] in_data;
  logic [W_IN/POOL-1:0] out_data;
  int checks = 0, failures = 0;

  spike_maxpool #(.W_IN(W_IN), .POOL(POOL)) dut (.*);

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int it = 0; it < 300; it++) begin
      in_data = W_IN'($urandom); in_valid = 1'($urandom); out_ready = 1'($urandom);
      #1;
      for (int j = 0; j < W_IN/POOL; j++) begin
        checks++;
        if (out_data[j] != (in_data[2*j] | in_data[2*j+1])) begin failures++; $display("bit %0d", j); end
      end
      checks++;
      if (out_valid != in_valid || in_ready != out_ready) begin failures++; $display("handshake"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
