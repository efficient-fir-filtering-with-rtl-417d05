// blmac_tb_pkg: reference arithmetic for the BLMAC testbenches.
//
// naf()          signed-digit (non-adjacent form) expansion of a coefficient:
//                w = sum_i d[i] * 2**i with d[i] in {-1,0,+1} and no two
//                neighbouring digits non-zero, which minimises the pulses.
// build_codes()  the run-length code stream for the 64 distinct coefficients
//                of a 127-tap type I filter: for layer 0 up to 15, one
//                (SIGN, ZRUN) code per pulse in increasing index, then EOR.
// fir_ref()      the classical direct-form dot product, used as the golden
//                value (no rounding).
package blmac_tb_pkg;
  import blmac_pkg::*;

  localparam int NCOEF = N_TAPS / 2 + 1;

  function automatic void naf(input int w, output int d[NUM_LAYERS], output bit ok);
    int n;
    n  = w;
    ok = 1'b1;
    for (int i = 0; i < NUM_LAYERS; i++) begin
      if ((n & 1) != 0) begin
        d[i] = ((n & 3) == 1) ? 1 : -1;
        n    = n - d[i];
      end else begin
        d[i] = 0;
      end
      n = n >>> 1;
    end
    if (n != 0) ok = 1'b0;
  endfunction

  function automatic int pulses_of(input int w);
    int d[NUM_LAYERS];
    bit ok;
    int c = 0;
    naf(w, d, ok);
    for (int i = 0; i < NUM_LAYERS; i++) if (d[i] != 0) c++;
    return c;
  endfunction

  function automatic void build_codes(input int w[NCOEF], output logic [CODE_W-1:0] codes[$]);
    int d[NCOEF][NUM_LAYERS];
    bit ok;
    codes = {};
    for (int j = 0; j < NCOEF; j++) naf(w[j], d[j], ok);
    for (int l = 0; l < NUM_LAYERS; l++) begin
      int last = -1;
      for (int j = 0; j < NCOEF; j++) begin
        if (d[j][l] != 0) begin
          rl_code_t c;
          c.eor  = 1'b0;
          c.sign = (d[j][l] < 0);
          c.zrun = ZRUN_W'(j - last - 1);
          codes.push_back(c);
          last = j;
        end
      end
      codes.push_back(EOR_CODE);
    end
  endfunction

  // x[0] is the newest sample
  function automatic longint fir_ref(input int w[NCOEF], input int x[N_TAPS]);
    longint acc = 0;
    for (int k = 0; k < N_TAPS; k++) begin
      int j = (k < NCOEF) ? k : N_TAPS - 1 - k;
      acc += longint'(w[j]) * longint'(x[k]);
    end
    return acc;
  endfunction

endpackage
