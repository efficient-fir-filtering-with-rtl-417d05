// tb_run_length_expander: random bit layers (random subsets of indices
// 0..63) are encoded as (ZRUN) codes plus EOR and fed one per cycle, with
// idle cycles and occasional clears in between; every pulse's index must
// equal the index that was encoded.
module tb_run_length_expander;
  logic clk = 0, rst_n = 0, clear = 0, valid = 0, eor = 0;
  logic [5:0] zrun = '0;
  logic [6:0] idx;
  int checks = 0, failures = 0;

  run_length_expander dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int layer = 0; layer < 300; layer++) begin
      automatic int last = -1;
      automatic int density = $urandom_range(0, 100);
      for (int j = 0; j < 64; j++) begin
        if ($urandom_range(0, 99) < density) begin
          @(negedge clk);
          valid = 1; eor = 0; zrun = 6'(j - last - 1);
          #1;
          checks++;
          if (int'(idx) != j) begin
            failures++;
            $display("layer %0d: idx %0d expected %0d", layer, idx, j);
          end
          last = j;
          if ($urandom_range(0, 7) == 0) begin
            @(negedge clk); valid = 0; zrun = 6'($urandom);
          end
        end
      end
      @(negedge clk);
      valid = 1; eor = 1; zrun = 6'($urandom);
      if ($urandom_range(0, 19) == 0) begin
        @(negedge clk); valid = 1; eor = 0; zrun = 6'd5;   // stray pulse ...
        @(negedge clk); valid = 0; clear = 1;              // ... removed by clear
        @(negedge clk); clear = 0;
      end
    end
    @(negedge clk); valid = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
