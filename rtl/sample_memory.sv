// sample_memory: the filter's delay line with a symmetric read port.
//
// N_TAPS registers of SAMPLE_W bits form a shift chain; shift_en moves every
// sample one place along and puts sample_in at position 0 (the newest sample).
// Two multiplexers read the chain at idx and at N_TAPS-1-idx, so one index
// fetches both samples that share a coefficient of a symmetric (type I)
// filter. centre is high when idx names the middle tap, which has no partner.
//
// The chain with two read multiplexers follows the paper's block diagram; on
// an FPGA it maps to addressable shift-register LUTs (distributed memory).
//
// Timing: the reads are combinational; the shift takes effect at the clock
// edge. Contents are cleared by reset (this design's choice).
module sample_memory #(
  parameter int unsigned N_TAPS   = blmac_pkg::N_TAPS,
  parameter int unsigned SAMPLE_W = blmac_pkg::SAMPLE_W,
  parameter int unsigned IDX_W    = $clog2(N_TAPS)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       shift_en,
  input  logic signed [SAMPLE_W-1:0] sample_in,
  input  logic        [IDX_W-1:0]    idx,
  output logic signed [SAMPLE_W-1:0] x_lo,
  output logic signed [SAMPLE_W-1:0] x_hi,
  output logic                       centre
);

  logic signed [SAMPLE_W-1:0] x [N_TAPS];
  logic        [IDX_W-1:0]    idx_hi;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_TAPS; i++) x[i] <= '0;
    end else if (shift_en) begin
      x[0] <= sample_in;
      for (int i = 1; i < N_TAPS; i++) x[i] <= x[i-1];
    end
  end

  assign idx_hi = IDX_W'(N_TAPS - 1) - idx;
  assign centre = (idx == IDX_W'(N_TAPS / 2));

  always_comb begin
    x_lo = '0;
    x_hi = '0;
    if (int'(idx) < N_TAPS)    x_lo = x[idx];
    if (int'(idx_hi) < N_TAPS) x_hi = x[idx_hi];
  end

endmodule
