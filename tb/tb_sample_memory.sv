// tb_sample_memory: shifts random samples into the 127-deep delay line and
// after every shift reads all 127 indices, checking x_lo = x[idx],
// x_hi = x[126-idx] and the centre flag against a software delay line.
module tb_sample_memory;
  logic clk = 0, rst_n = 0, shift_en = 0;
  logic signed [7:0] sample_in = '0;
  logic [6:0] idx = '0;
  logic signed [7:0] x_lo, x_hi;
  logic centre;
  int model [127];
  int checks = 0, failures = 0;

  sample_memory dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (model[k]) model[k] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      shift_en = ($urandom_range(0, 4) != 0);
      sample_in = 8'($urandom);
      @(posedge clk);
      if (shift_en) begin
        for (int k = 126; k > 0; k--) model[k] = model[k-1];
        model[0] = int'(sample_in);
      end
      @(negedge clk);
      shift_en = 0;
      if (n % 10 == 9) begin
        for (int i = 0; i < 127; i++) begin
          idx = 7'(i);
          #1;
          checks++;
          if (int'(x_lo) != model[i] || int'(x_hi) != model[126-i] || centre != (i == 63)) begin
            failures++;
            $display("idx %0d: lo %0d/%0d hi %0d/%0d centre %b", i, x_lo, model[i], x_hi, model[126-i], centre);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
