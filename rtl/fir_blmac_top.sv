// fir_blmac_top: 127-tap type I FIR filter built on a bit layer multiply
// accumulator (BLMAC), with no multiplier.
//
// The 64 distinct coefficients of a symmetric 127-tap filter are stored as
// signed-digit bit layers, each layer run-length coded (see blmac_pkg) in a
// 256 x 8 weight memory. The machine reads one code per clock. A pulse code
// is expanded to a coefficient index j; the sample memory returns x[j] and
// x[126-j]; the pre-adder sums them; the BLMAC adds or subtracts the sum
// according to the pulse sign. An EOR code shifts the accumulator right by
// one, and the bit that falls out goes into a 16-bit shift register. After
// the 16th EOR, {acc, sr} is the exact dot product (no rounding).
//
// Use: write the codes (wm_we/wm_waddr/wm_wdata), shift 127 samples in
// (sample_valid/sample_in, accepted while sample_ready), pulse start. The
// machine is busy for exactly one cycle per code (pulses + 16 EORs), then
// done pulses and result holds y = sum_k w[k] * x[k], x[0] the newest sample.
// Shift the next sample in and start again for the next output.
//
// Structure and sizes follow the paper's 127-tap machine; the code word
// layout, the accumulator width, the start/done handshake and the handling
// of the middle tap are this design's choices.
module fir_blmac_top
  import blmac_pkg::*;
(
  input  logic                       clk,
  input  logic                       rst_n,
  // weight (code) memory write port
  input  logic                       wm_we,
  input  logic [CODE_AW-1:0]         wm_waddr,
  input  logic [CODE_W-1:0]          wm_wdata,
  // sample input
  input  logic                       sample_valid,
  input  logic signed [SAMPLE_W-1:0] sample_in,
  output logic                       sample_ready,
  // control
  input  logic                       start,
  output logic                       busy,
  output logic                       done,
  output logic signed [RESULT_W-1:0] result
);

  logic                       clear, code_valid;
  logic [CODE_AW-1:0]         raddr;
  logic [CODE_W-1:0]          code_word;
  rl_code_t                   code;
  logic [IDX_W-1:0]           idx;
  logic signed [SAMPLE_W-1:0] x_lo, x_hi;
  logic                       centre;
  logic signed [PRE_W-1:0]    presum;
  logic signed [ACC_W-1:0]    acc;
  logic                       lsb_out;
  logic [SR_W-1:0]            sr;
  logic                       is_eor, is_pulse;

  assign code     = rl_code_t'(code_word);
  assign is_eor   = code_valid && code.eor;
  assign is_pulse = code_valid && !code.eor;

  blmac_controller u_ctrl (
    .clk, .rst_n, .start, .code_eor(is_eor),
    .clear, .code_valid, .busy, .done
  );

  weight_addr_counter u_addr (
    .clk, .rst_n, .clear, .en(code_valid), .addr(raddr)
  );

  weight_memory u_wmem (
    .clk, .we(wm_we), .waddr(wm_waddr), .wdata(wm_wdata),
    .raddr, .rdata(code_word)
  );

  run_length_expander u_rle (
    .clk, .rst_n, .clear, .valid(code_valid),
    .eor(code.eor), .zrun(code.zrun), .idx
  );

  assign sample_ready = !busy;

  sample_memory u_smem (
    .clk, .rst_n, .shift_en(sample_valid && sample_ready), .sample_in,
    .idx, .x_lo, .x_hi, .centre
  );

  pre_adder u_pre (
    .a(x_lo), .b(x_hi), .centre, .sum(presum)
  );

  blmac_accumulator u_blmac (
    .clk, .rst_n, .clear, .add_en(is_pulse), .shift(is_eor),
    .sub(code.sign), .din(presum), .acc, .lsb_out
  );

  lsb_shift_register u_sr (
    .clk, .rst_n, .clear, .shift_en(is_eor), .bit_in(lsb_out), .q(sr)
  );

  assign result = {acc, sr};

endmodule
