// weight_addr_counter: read address of the weight (code) memory.
//
// The register with a +1 feedback in front of the weight memory. It is
// cleared when a dot product starts and then advances by one every cycle in
// which a code is consumed, so the run-length codes are read strictly in
// order, one per clock. The counter wraps at 2**ADDR_W.
//
// Interface: clear (synchronous, wins over en), en (advance), addr (current
// read address, registered). Reset value 0 is this design's choice.
module weight_addr_counter #(
  parameter int unsigned ADDR_W = blmac_pkg::CODE_AW
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,
  input  logic              en,
  output logic [ADDR_W-1:0] addr
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     addr <= '0;
    else if (clear) addr <= '0;
    else if (en)    addr <= addr + 1'b1;
  end

endmodule
