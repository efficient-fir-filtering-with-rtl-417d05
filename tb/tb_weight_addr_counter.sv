// tb_weight_addr_counter: random clear/enable sequence against a software
// counter; checks the address every cycle, including the wrap at 255 -> 0.
module tb_weight_addr_counter;
  logic clk = 0, rst_n = 0, clear = 0, en = 0;
  logic [7:0] addr;
  int checks = 0, failures = 0, model = 0, wraps = 0;

  weight_addr_counter dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      clear = ($urandom_range(0, 99) == 0);
      en    = (i > 1500) || ($urandom_range(0, 3) != 0);
      @(posedge clk);
      if (clear) model = 0;
      else if (en) begin
        model = (model + 1) % 256;
        if (model == 0) wraps++;
      end
      #1;
      checks++;
      if (int'(addr) != model) begin
        failures++;
        $display("addr %0d expected %0d", addr, model);
      end
    end
    checks++; if (wraps == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
