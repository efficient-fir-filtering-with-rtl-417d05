// blmac_accumulator: right-shift bit layer multiply accumulator.
//
// The accumulator register is fed by a 2:1 multiplexer. One input is the
// add/subtract unit, acc +/- din, used for every pulse (sub = 1 for a -1
// pulse). The other is the accumulator shifted right by one (arithmetic),
// used at the end of every bit layer. Starting from the least significant
// layer, after layer i the accumulator's LSB is bit i of the final dot
// product; it is no longer changed by later layers and leaves on lsb_out in
// the cycle of the shift. After the last layer the accumulator holds the
// upper part of the result and the bits shifted out the lower part.
//
// Interface: clear (synchronous, highest priority), add_en, shift, sub, din.
// add_en and shift are never high together. Width ACC_W is an assumption:
// 18 bits hold any 127-tap result of 8-bit samples with 16-bit weights.
module blmac_accumulator #(
  parameter int unsigned IN_W  = blmac_pkg::PRE_W,
  parameter int unsigned ACC_W = blmac_pkg::ACC_W
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clear,
  input  logic                    add_en,
  input  logic                    shift,
  input  logic                    sub,
  input  logic signed [IN_W-1:0]  din,
  output logic signed [ACC_W-1:0] acc,
  output logic                    lsb_out
);

  logic signed [ACC_W-1:0] addsub;
  logic signed [ACC_W-1:0] shifted;

  assign addsub  = sub ? acc - ACC_W'(din) : acc + ACC_W'(din);
  assign shifted = acc >>> 1;
  assign lsb_out = acc[0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      acc <= '0;
    else if (clear)  acc <= '0;
    else if (shift)  acc <= shifted;
    else if (add_en) acc <= addsub;
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(add_en && shift))
    else $error("blmac_accumulator: add and shift in the same cycle");

endmodule
