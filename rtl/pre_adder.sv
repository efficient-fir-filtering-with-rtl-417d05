// pre_adder: adds the two samples that share a symmetric coefficient.
//
// A type I filter has w[j] = w[N-1-j], so w[j]*x[j] + w[N-1-j]*x[N-1-j] =
// w[j]*(x[j] + x[N-1-j]). The sum is one bit wider than a sample. For the
// middle tap the two reads name the same register, so the second operand is
// dropped (centre = 1) to add that sample once; the paper does not say how it
// treats the middle tap, this is this design's choice. Purely combinational.
module pre_adder #(
  parameter int unsigned SAMPLE_W = blmac_pkg::SAMPLE_W
) (
  input  logic signed [SAMPLE_W-1:0] a,
  input  logic signed [SAMPLE_W-1:0] b,
  input  logic                       centre,
  output logic signed [SAMPLE_W:0]   sum
);

  always_comb begin
    sum = (SAMPLE_W+1)'(a) + (centre ? '0 : (SAMPLE_W+1)'(b));
  end

endmodule
