// tb_fir_hamming_workload: the 127-tap Hamming-window filter set on the
// machine at its default size.
//
// Part 1 designs all 9,900 filters of the grid (see fir_design_pkg),
// quantises them to 16 bits and counts the run-length codes each needs:
// a filter fits when its codes fit the 256-word weight memory, and a fitting
// filter takes one clock per code. The share that does not fit and the mean
// cycle count of those that do are printed.
// Part 2 runs NSIM fitting filters, spread evenly over the grid (about one
// in fifty, all four filter types), through the machine: codes are written,
// 126 + NOUT random 8-bit samples are streamed and each of the NOUT outputs is compared with the exact direct-form sum
// and its cycle count with the code count.
module tb_fir_hamming_workload;
  import blmac_pkg::*;
  import blmac_tb_pkg::*;
  import fir_design_pkg::*;

  localparam int NSIM = 200;
  localparam int NOUT = 256;
  localparam int NGRID = DIV * (DIV - 1);

  logic clk = 0, rst_n = 0;
  logic wm_we = 0;
  logic [CODE_AW-1:0] wm_waddr = '0;
  logic [CODE_W-1:0]  wm_wdata = '0;
  logic sample_valid = 0;
  logic signed [SAMPLE_W-1:0] sample_in = '0;
  logic sample_ready, start = 0, busy, done;
  logic signed [RESULT_W-1:0] result;

  int checks = 0, failures = 0;

  fir_blmac_top dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int w[NCOEF];
  int x[N_TAPS];
  logic [CODE_W-1:0] codes[$];
  int ncodes[NGRID];

  task automatic make_filter(input int idx);
    ftype_t t;
    real f1, f2;
    real h[N_TAPS];
    grid(idx, t, f1, f2);
    firwin_hamming(t, f1, f2, h);
    quantise(h, w);
    build_codes(w, codes);
  endtask

  task automatic push_sample(input int s);
    @(negedge clk);
    sample_valid = 1; sample_in = SAMPLE_W'(s);
    @(negedge clk);
    sample_valid = 0;
    for (int k = N_TAPS-1; k > 0; k--) x[k] = x[k-1];
    x[0] = s;
  endtask

  initial begin
    automatic int nfit = 0;
    automatic longint sum_codes = 0, sum_cyc = 0, nrun = 0;
    automatic int sel[$];

    // part 1: code counts over the whole grid
    for (int i = 0; i < NGRID; i++) begin
      make_filter(i);
      ncodes[i] = codes.size();
      if (codes.size() <= CODE_DEPTH) begin
        nfit++;
        sum_codes += longint'(codes.size());
      end
    end
    $display("grid: %0d filters, %0d fit in %0d codes (%0.1f%% do not), mean cycles of those that fit %0.1f",
             NGRID, nfit, CODE_DEPTH, 100.0 * (NGRID - nfit) / NGRID, real'(sum_codes) / nfit);
    checks++;
    if (nfit == 0) failures++;

    // part 2: simulate NSIM fitting filters spread over the grid
    for (int k = 0; k < NSIM; k++) begin
      automatic int i = k * (NGRID / NSIM);
      while (ncodes[i] > CODE_DEPTH) i++;
      sel.push_back(i);
    end
    for (int k = 0; k < N_TAPS; k++) x[k] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    foreach (sel[f]) begin
      make_filter(sel[f]);
      foreach (codes[i]) begin
        @(negedge clk);
        wm_we = 1; wm_waddr = CODE_AW'(i); wm_wdata = codes[i];
      end
      @(negedge clk); wm_we = 0;
      for (int k = 0; k < N_TAPS - 1; k++) push_sample(int'($urandom_range(0, 255)) - 128);
      for (int n = 0; n < NOUT; n++) begin
        automatic int cyc = 0;
        automatic longint expv;
        push_sample(int'($urandom_range(0, 255)) - 128);
        @(negedge clk); start = 1;
        @(negedge clk); start = 0;
        while (!done) begin
          if (busy) cyc++;
          @(negedge clk);
        end
        expv = fir_ref(w, x);
        checks++;
        if (longint'(result) != expv) begin
          failures++;
          if (failures < 10) $display("filter %0d output %0d: got %0d expected %0d", sel[f], n, result, expv);
        end
        checks++;
        if (cyc != codes.size()) failures++;
        sum_cyc += longint'(cyc);
        nrun++;
      end
    end
    $display("simulated %0d filters x %0d outputs, mean %0.1f cycles per output",
             sel.size(), NOUT, real'(sum_cyc) / nrun);
    checks++;
    if (sel.size() != NSIM) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
