// tb_fir_blmac_top: end-to-end test of the 127-tap BLMAC FIR machine.
//
// For each of several random symmetric filters the test writes the code
// stream into the weight memory, fills the delay line with 127 random
// samples, then computes NOUT outputs, shifting one new sample in between.
// Every result is compared with the direct-form dot product, and the number
// of busy cycles with the number of codes (one code per clock). Coefficients
// are drawn with a skewed magnitude distribution and include the extremes
// -32768 and 32767, so empty layers, negative pulses and the middle tap all
// occur. The test also offers samples while the machine is busy and checks
// they are refused. Each mechanism is counted and must occur at least once.
// Runs with all parameters at their defaults.
module tb_fir_blmac_top;
  import blmac_pkg::*;
  import blmac_tb_pkg::*;

  localparam int NFILT = 6;
  localparam int NOUT  = 24;

  logic clk = 0, rst_n = 0;
  logic wm_we = 0;
  logic [CODE_AW-1:0] wm_waddr = '0;
  logic [CODE_W-1:0]  wm_wdata = '0;
  logic sample_valid = 0;
  logic signed [SAMPLE_W-1:0] sample_in = '0;
  logic sample_ready, start = 0, busy, done;
  logic signed [RESULT_W-1:0] result;

  int checks = 0, failures = 0;
  int n_add = 0, n_sub = 0, n_shift = 0, n_empty = 0, n_centre = 0, n_refused = 0, n_neg = 0;

  fir_blmac_top dut (.*);

  always #5 clk = ~clk;

  // watchdog
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mechanism tally, worked out from the code stream of each dot product
  task automatic tally(input logic [CODE_W-1:0] cs[$]);
    bit prev_eor = 1'b1;
    int j = -1;
    foreach (cs[i]) begin
      rl_code_t c = rl_code_t'(cs[i]);
      if (c.eor) begin
        n_shift++;
        if (prev_eor) n_empty++;
        prev_eor = 1'b1;
        j = -1;
      end else begin
        if (c.sign) n_sub++; else n_add++;
        j = j + int'(c.zrun) + 1;
        if (j == N_TAPS / 2) n_centre++;
        prev_eor = 1'b0;
      end
    end
  endtask

  int w[NCOEF];
  int x[N_TAPS];
  logic [CODE_W-1:0] codes[$];

  task automatic push_sample(input int s);
    @(negedge clk);
    sample_valid = 1; sample_in = SAMPLE_W'(s);
    @(negedge clk);
    sample_valid = 0;
    for (int k = N_TAPS-1; k > 0; k--) x[k] = x[k-1];
    x[0] = s;
  endtask

  task automatic run_one();
    int cyc = 0;
    longint expv;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (!done) begin
      if (busy) cyc++;
      if (cyc == 3) begin  // offer a sample while busy: it must be refused
        sample_valid = 1; sample_in = 8'sh55;
        if (!sample_ready) n_refused++;
      end else sample_valid = 0;
      @(negedge clk);
    end
    sample_valid = 0;
    expv = fir_ref(w, x);
    checks++;
    if (longint'(result) != expv) begin
      failures++;
      $display("result mismatch: got %0d expected %0d", result, expv);
    end
    if (expv < 0) n_neg++;
    tally(codes);
    checks++;
    if (cyc != codes.size()) begin
      failures++;
      $display("cycle count %0d, expected %0d codes", cyc, codes.size());
    end
  endtask

  initial begin
    for (int k = 0; k < N_TAPS; k++) x[k] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int f = 0; f < NFILT; f++) begin
      do begin
        for (int j = 0; j < NCOEF; j++) begin
          automatic int m = int'($urandom_range(0, 32767)) >>> $urandom_range(2, 15);
          w[j] = ($urandom_range(0, 1) != 0) ? -m : m;
        end
        w[NCOEF-1] = (f % 2 == 0) ? -32768 : 32767;
        if (f == 1) w[0] = -32768;
        build_codes(w, codes);
      end while (codes.size() > CODE_DEPTH);
      foreach (codes[i]) begin
        @(negedge clk);
        wm_we = 1; wm_waddr = CODE_AW'(i); wm_wdata = codes[i];
      end
      @(negedge clk); wm_we = 0;
      for (int k = 0; k < N_TAPS; k++) begin
        automatic int s = int'($urandom_range(0, 255)) - 128;
        if (f == 2) s = (k % 2 == 0) ? -128 : 127;
        push_sample(s);
      end
      for (int n = 0; n < NOUT; n++) begin
        run_one();
        push_sample(int'($urandom_range(0, 255)) - 128);
      end
    end
    $display("mechanisms: add=%0d sub=%0d shift=%0d empty_layer=%0d centre_tap=%0d refused_sample=%0d negative_result=%0d",
             n_add, n_sub, n_shift, n_empty, n_centre, n_refused, n_neg);
    checks++; if (n_add     == 0) failures++;
    checks++; if (n_sub     == 0) failures++;
    checks++; if (n_shift   == 0) failures++;
    checks++; if (n_empty   == 0) failures++;
    checks++; if (n_centre  == 0) failures++;
    checks++; if (n_refused == 0) failures++;
    checks++; if (n_neg     == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
