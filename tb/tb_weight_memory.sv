// tb_weight_memory: fills all 256 words with random codes, then reads every
// address back through the asynchronous read port (same cycle), and checks
// that an overwrite of a few words takes effect and leaves the others alone.
module tb_weight_memory;
  logic clk = 0, we = 0;
  logic [7:0] waddr = '0, wdata = '0, raddr = '0, rdata;
  logic [7:0] model [256];
  int checks = 0, failures = 0;

  weight_memory dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_all();
    for (int a = 0; a < 256; a++) begin
      raddr = 8'(a);
      #1;
      checks++;
      if (rdata !== model[a]) begin
        failures++;
        $display("addr %0d read %h expected %h", a, rdata, model[a]);
      end
    end
  endtask

  initial begin
    for (int a = 0; a < 256; a++) begin
      @(negedge clk);
      we = 1; waddr = 8'(a); wdata = 8'($urandom); model[a] = wdata;
    end
    @(negedge clk); we = 0;
    check_all();
    for (int k = 0; k < 20; k++) begin
      @(negedge clk);
      we = 1; waddr = 8'($urandom); wdata = 8'($urandom); model[waddr] = wdata;
    end
    @(negedge clk); we = 0;
    check_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
