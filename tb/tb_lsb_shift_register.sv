// tb_lsb_shift_register: random bits shifted in with random enables and
// clears; the 16-bit contents are compared with a software model each cycle.
module tb_lsb_shift_register;
  logic clk = 0, rst_n = 0, clear = 0, shift_en = 0, bit_in = 0;
  logic [15:0] q;
  logic [15:0] model = '0;
  int checks = 0, failures = 0;

  lsb_shift_register dut (.*);
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
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      clear = ($urandom_range(0, 49) == 0);
      shift_en = ($urandom_range(0, 2) != 0);
      bit_in = 1'($urandom);
      @(posedge clk);
      if (clear) model = '0;
      else if (shift_en) model = {bit_in, model[15:1]};
      #1;
      checks++;
      if (q !== model) begin
        failures++;
        $display("q %h expected %h", q, model);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
