// tb_dma - the DMA copies 40 words inside a behavioural bus memory whose
// ready is random; checks the copy, the untouched neighbours, the done
// interrupt and that each word costs at least four cycles.
module tb_dma;
  import j3dai_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, irq;
  bus_req_t req, m_req;
  bus_rsp_t rsp, m_rsp;
  logic [63:0] mem [256];
  logic rdy, v_q;
  logic [63:0] rd;
  int cyc = 0;

  always #5 clk = ~clk;
  dma dut (.*);

  always_ff @(posedge clk) begin
    v_q <= m_req.valid && rdy;
    if (m_req.valid && rdy) begin
      if (m_req.we) mem[m_req.addr[10:3]] <= m_req.wdata;
      rd <= mem[m_req.addr[10:3]];
    end
  end
  assign m_rsp = '{ready: rdy, rvalid: v_q, rdata: rd};
  always @(negedge clk) rdy <= ($urandom_range(0, 3) != 0);

  task automatic bus_wr(input logic [31:0] a, input logic [63:0] d);
    @(negedge clk); req = '0; req.valid = 1; req.we = 1; req.addr = a; req.wdata = d; req.be = '1;
    @(negedge clk); req = '0;
  endtask
  task automatic bus_rd(input logic [31:0] a, output logic [63:0] d);
    @(negedge clk); req = '0; req.valid = 1; req.addr = a;
    @(negedge clk); req = '0; d = rsp.rdata;
  endtask

  initial begin
    #1000000 failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [63:0] d, orig [256];
    req = '0;
    for (int w = 0; w < 256; w++) begin mem[w] = {$urandom, $urandom}; orig[w] = mem[w]; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    bus_wr(32'h00, 64'h80);      // src word 16
    bus_wr(32'h08, 64'h400);     // dst word 128
    bus_wr(32'h10, 64'd40);
    bus_wr(32'h18, 64'h3);
    cyc = 0;
    do begin bus_rd(32'h20, d); cyc += 2; end while (d[0]);
    checks++; if (cyc < 160) begin failures++; $display("FAIL too fast %0d", cyc); end
    checks++; if (!irq) failures++;
    for (int w = 0; w < 40; w++) begin checks++; if (mem[128 + w] !== orig[16 + w]) failures++; end
    checks++; if (mem[127] !== orig[127] || mem[168] !== orig[168]) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
