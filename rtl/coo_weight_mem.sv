// coo_weight_mem: the non-zero weights of one convolutional layer in
// coordinate (COO) format.
//
// Entry n holds W[n].D (16-bit weight), W[n].RI (row index = oc * IC + ic,
// which merges the output- and input-channel indices) and W[n].CI (column,
// i.e. the kernel tap). Entries are stored in output-channel order, as the
// layer iterates over them. The field widths follow the COO overhead table
// of the paper (25, 29 and 30 bits for the three layers); the depth is the
// dense weight count so that any density fits. Two combinational read ports
// return W[nnz] and W[nnz+1], which the controller needs in the same
// iteration. Written only through the configuration bus; contents are not
// reset.
module coo_weight_mem #(
  parameter int unsigned DEPTH = 352,
  parameter int unsigned RI_W  = 5,
  parameter int unsigned CI_W  = 4,
  parameter int unsigned D_W   = 16,
  localparam int unsigned EW = D_W + RI_W + CI_W,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [EW-1:0] wentry,   // {D, RI, CI}
  input  logic [AW-1:0] raddr0,
  output logic [EW-1:0] rentry0,
  input  logic [AW-1:0] raddr1,
  output logic [EW-1:0] rentry1
);
  logic [EW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wentry;
  end

  assign rentry0 = mem[raddr0];
  assign rentry1 = mem[raddr1];
endmodule
