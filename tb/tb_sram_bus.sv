// tb_sram_bus - random bus reads and byte-masked writes on a small SRAM,
// checked against a reference array, with rvalid exactly one cycle later.
module tb_sram_bus;
  import j3dai_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  bus_req_t req;
  bus_rsp_t rsp;
  logic [63:0] refm [256];

  always #5 clk = ~clk;
  sram_bus #(.WORDS(256)) dut (.*);

  initial begin
    #1000000 failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    req = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int w = 0; w < 256; w++) begin
      @(negedge clk); req = '0; req.valid = 1; req.we = 1; req.be = '1; req.addr = 32'(w * 8);
      req.wdata = {$urandom, $urandom}; refm[w] = req.wdata;
    end
    for (int n = 0; n < 2000; n++) begin
      int w;
      @(negedge clk);
      w = $urandom_range(0, 255);
      req = '0; req.valid = 1; req.we = $urandom_range(0, 1); req.addr = 32'(w * 8);
      req.be = 8'($urandom); req.wdata = {$urandom, $urandom};
      if (req.we) begin
        for (int b = 0; b < 8; b++) if (req.be[b]) refm[w][8*b +: 8] = req.wdata[8*b +: 8];
        @(negedge clk); req = '0; checks++; if (!rsp.rvalid) failures++;
      end else begin
        logic [63:0] e;
        e = refm[w];
        @(negedge clk); req = '0; checks++;
        if (!rsp.rvalid || rsp.rdata !== e) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
