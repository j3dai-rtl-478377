// tb_mem_bank - writes random words with random byte enables and reads them
// back against a reference array; checks the one-cycle read latency.
module tb_mem_bank;
  int checks = 0, failures = 0;
  logic clk = 0, en = 0, we = 0;
  logic [7:0] be;
  logic [9:0] addr;
  logic [63:0] wdata, rdata;
  logic [63:0] ref_mem [1024];

  always #5 clk = ~clk;
  mem_bank #(.WORDS(1024), .DW(64)) dut (.clk, .en, .we, .be, .addr, .wdata, .rdata);

  initial begin
    #500000 failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    be = '1;
    for (int i = 0; i < 1024; i++) begin
      @(negedge clk); en = 1; we = 1; addr = 10'(i); wdata = {$urandom, $urandom}; ref_mem[i] = wdata;
    end
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      en = 1; we = $urandom_range(0, 1); addr = 10'($urandom); be = 8'($urandom);
      wdata = {$urandom, $urandom};
      if (we) begin
        for (int k = 0; k < 8; k++) if (be[k]) ref_mem[addr][8*k +: 8] = wdata[8*k +: 8];
      end else begin
        logic [63:0] e;
        e = ref_mem[addr];
        @(posedge clk); #1;
        checks++;
        if (rdata !== e) begin failures++; if (failures < 5) $display("FAIL addr=%0d", addr); end
      end
    end
    // rdata holds while idle
    @(negedge clk); en = 1; we = 0; addr = 10'd3;
    @(negedge clk); en = 0; addr = 10'd4;
    @(negedge clk); checks++; if (rdata !== ref_mem[3]) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
