// weight_memory: the 256 x 8 code memory holding the compressed weights.
//
// Each word is one run-length code (see blmac_pkg): a pulse (SIGN, ZRUN) or an
// end-of-layer marker (EOR). The memory is written from outside before the
// machine is started and read one word per cycle while it runs.
//
// Like the distributed (LUT) RAM the paper uses, it has a synchronous write
// port and an asynchronous read port: rdata follows raddr in the same cycle.
// The contents are not reset.
module weight_memory #(
  parameter int unsigned DEPTH  = blmac_pkg::CODE_DEPTH,
  parameter int unsigned WIDTH  = blmac_pkg::CODE_W,
  parameter int unsigned ADDR_W = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              we,
  input  logic [ADDR_W-1:0] waddr,
  input  logic [WIDTH-1:0]  wdata,
  input  logic [ADDR_W-1:0] raddr,
  output logic [WIDTH-1:0]  rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  assign rdata = mem[raddr];

endmodule
