// tb_sys_regs - ID, scratch, interrupt status and masking.
module tb_sys_regs;
  import j3dai_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, irq;
  bus_req_t req;
  bus_rsp_t rsp;
  logic [7:0] irq_src = 0;

  always #5 clk = ~clk;
  sys_regs dut (.*);

  task automatic chk(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", m); end
  endtask
  task automatic bus_wr(input logic [31:0] a, input logic [63:0] d);
    @(negedge clk); req = '0; req.valid = 1; req.we = 1; req.addr = a; req.wdata = d; req.be = '1;
    @(negedge clk); req = '0;
  endtask
  task automatic bus_rd(input logic [31:0] a, output logic [63:0] d);
    @(negedge clk); req = '0; req.valid = 1; req.addr = a;
    @(negedge clk); req = '0; d = rsp.rdata; chk(rsp.rvalid, "rvalid");
  endtask

  initial begin
    #100000 failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [63:0] d;
    req = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    bus_rd(32'h0, d); chk(d == 64'h4A33_4441, "id");
    bus_wr(32'h8, 64'h0123_4567_89ab_cdef);
    bus_rd(32'h8, d); chk(d == 64'h0123_4567_89ab_cdef, "scratch");
    irq_src = 8'h24;
    bus_rd(32'h10, d); chk(d == 64'h24, "irq status");
    chk(!irq, "masked");
    bus_wr(32'h18, 64'h04); chk(irq, "unmasked source");
    bus_wr(32'h18, 64'h40); chk(!irq, "other mask");
    irq_src = 8'h40; #1 chk(irq, "source 6");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
