// tb_pre_adder: exhaustive check of all 8-bit sample pairs, with and without
// the centre flag, against integer addition.
module tb_pre_adder;
  logic signed [7:0] a, b;
  logic centre;
  logic signed [8:0] sum;
  int checks = 0, failures = 0;

  pre_adder dut (.*);

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = -128; i < 128; i++)
      for (int j = -128; j < 128; j++)
        for (int c = 0; c < 2; c++) begin
          a = 8'(i); b = 8'(j); centre = c[0];
          #1;
          checks++;
          if (int'(sum) != (c != 0 ? i : i + j)) begin
            failures++;
            if (failures < 10) $display("%0d + %0d (centre %0d) = %0d", i, j, c, sum);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
