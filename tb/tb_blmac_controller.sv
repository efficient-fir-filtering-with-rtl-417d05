// tb_blmac_controller: feeds random code streams (EOR with a given
// probability) and checks that clear is raised only by start while idle,
// that the machine stays busy for exactly as many cycles as it takes to see
// 16 EOR codes, that done pulses once right after, and that a start while
// busy is ignored.
module tb_blmac_controller;
  logic clk = 0, rst_n = 0, start = 0, code_eor = 0;
  logic clear, code_valid, busy, done;
  int checks = 0, failures = 0;

  blmac_controller dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int run = 0; run < 200; run++) begin
      automatic int eors = 0, cyc = 0, p = $urandom_range(5, 100);
      @(negedge clk);
      start = 1;
      #1;
      checks++; if (!clear || busy) failures++;
      @(negedge clk);
      start = 0;
      while (eors < 16) begin
        code_eor = ($urandom_range(1, 100) <= p);
        start = ($urandom_range(0, 9) == 0);   // ignored while busy
        #1;
        checks++; if (!busy || !code_valid || clear || done) failures++;
        cyc++;
        if (code_eor) eors++;
        @(negedge clk);
      end
      start = 0; code_eor = 0;
      #1;
      checks++;
      if (busy || !done) begin
        failures++;
        $display("run %0d: not finished after %0d cycles", run, cyc);
      end
      @(negedge clk);
      #1;
      checks++; if (done || busy) failures++;
      repeat ($urandom_range(0, 3)) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
