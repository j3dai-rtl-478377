// tb_aiu - runs random loop nests, with random gaps between steps, and
// checks the index sequence, first / last flags and the iteration count.
module tb_aiu;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0, step = 0;
  logic [11:0] n0, n1, n2, idx0, idx1, idx2;
  logic active, first, last;

  always #5 clk = ~clk;
  aiu dut (.clk, .rst_n, .start, .step, .n0, .n1, .n2, .idx0, .idx1, .idx2,
           .active, .first, .last);

  initial begin
    #2000000 failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      int c0, c1, c2, total;
      n0 = 12'($urandom_range(0, 6)); n1 = 12'($urandom_range(0, 4)); n2 = 12'($urandom_range(0, 3));
      c0 = (n0 == 0) ? 1 : n0; c1 = (n1 == 0) ? 1 : n1; c2 = (n2 == 0) ? 1 : n2;
      total = c0 * c1 * c2;
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      for (int k = 0; k < total; k++) begin
        int e0, e1, e2;
        e0 = k % c0; e1 = (k / c0) % c1; e2 = k / (c0 * c1);
        checks++;
        if (!active || idx0 != 12'(e0) || idx1 != 12'(e1) || idx2 != 12'(e2) ||
            last != (k == total - 1) || first != (k == 0)) begin
          failures++;
          if (failures < 5) $display("FAIL t=%0d k=%0d idx=%0d,%0d,%0d", t, k, idx0, idx1, idx2);
        end
        // a random number of idle cycles holds the indexes
        if ($urandom_range(0, 3) == 0) begin
          @(negedge clk);
          checks++; if (idx0 != 12'(e0)) failures++;
        end
        step = 1; @(negedge clk); step = 0;
      end
      checks++; if (active) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
