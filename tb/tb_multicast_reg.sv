// tb_multicast_reg - load / hold / reset behaviour of the multicast register.
module tb_multicast_reg;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, load = 0;
  logic [63:0] d, q, expq;

  always #5 clk = ~clk;
  multicast_reg dut (.clk, .rst_n, .load, .d, .q);

  initial begin
    #100000 failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    d = '1;
    @(negedge clk); checks++; if (q !== '0) failures++;
    rst_n = 1; expq = '0;
    for (int n = 0; n < 500; n++) begin
      @(negedge clk); load = $urandom_range(0, 1); d = {$urandom, $urandom};
      if (load) expq = d;
      @(posedge clk); #1; checks++;
      if (q !== expq) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
