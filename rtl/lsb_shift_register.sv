// lsb_shift_register: collects the result bits leaving the accumulator.
//
// Each time the BLMAC accumulator shifts right, its LSB enters here at the
// top and everything moves one place down. After SR_W shifts the bit of
// layer 0 is in q[0] and the bit of layer SR_W-1 in q[SR_W-1], so q is the
// low SR_W bits of the dot product. Synchronous clear, registered output.
module lsb_shift_register #(
  parameter int unsigned SR_W = blmac_pkg::SR_W
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            clear,
  input  logic            shift_en,
  input  logic            bit_in,
  output logic [SR_W-1:0] q
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        q <= '0;
    else if (clear)    q <= '0;
    else if (shift_en) q <= {bit_in, q[SR_W-1:1]};
  end

endmodule
