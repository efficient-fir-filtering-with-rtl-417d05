// tb_blmac_accumulator: computes random dot products of up to 64 9-bit
// inputs with random 16-bit signed weights the BLMAC way. The weights are
// expanded into signed-digit bit layers; layer 0 first, each pulse is an
// add or subtract of its input, each layer ends with a shift whose LSB is
// collected. The result {acc, collected bits} must equal the dot product.
module tb_blmac_accumulator;
  import blmac_pkg::*;
  import blmac_tb_pkg::*;

  logic clk = 0, rst_n = 0, clear = 0, add_en = 0, shift = 0, sub = 0;
  logic signed [8:0] din = '0;
  logic signed [17:0] acc;
  logic lsb_out;
  int checks = 0, failures = 0;

  blmac_accumulator dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    automatic int w[64], x[64], d[64][16];
    automatic bit ok;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      automatic longint expv = 0;
      automatic logic [15:0] bits;
      automatic logic signed [33:0] got;
      automatic int n = $urandom_range(1, 64);
      for (int j = 0; j < n; j++) begin
        w[j] = int'($urandom_range(0, 65535)) - 32768;
        if (t % 3 == 0) w[j] = w[j] >>> $urandom_range(0, 14);
        x[j] = int'($urandom_range(0, 511)) - 256;
        if (t == 0) begin w[j] = -32768; x[j] = -256; end
        naf(w[j], d[j], ok);
        expv += longint'(w[j]) * longint'(x[j]);
      end
      @(negedge clk); clear = 1;
      @(negedge clk); clear = 0;
      for (int l = 0; l < 16; l++) begin
        for (int j = 0; j < n; j++) if (d[j][l] != 0) begin
          add_en = 1; shift = 0; sub = (d[j][l] < 0); din = 9'(x[j]);
          @(negedge clk);
        end
        add_en = 0; shift = 1;
        bits[l] = lsb_out;
        @(negedge clk);
        shift = 0;
      end
      got = {acc, bits};
      checks++;
      if (longint'(got) != expv) begin
        failures++;
        $display("test %0d: got %0d expected %0d", t, got, expv);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
