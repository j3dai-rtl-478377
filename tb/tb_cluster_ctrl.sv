// tb_cluster_ctrl - loads a small program through the bus, runs it and
// watches the broadcast control: the AGU address sequence of a looped MAC,
// AIU-driven multicast byte selection, the first-iteration clear, one
// injected stall that must repeat the iteration, STORE addresses, the done
// interrupt and the CYCLES / STALLS registers (20 cycles expected: 2 per
// instruction for fetch and decode, plus one per iteration and per stall).
module tb_cluster_ctrl;
  import j3dai_pkg::*;
  import j3dai_asm_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, stall = 0, busy, irq;
  bus_req_t req;
  bus_rsp_t rsp;
  issue_t issue;
  ex_t ex;
  nl_cfg_t nl_cfg;
  int rd_addr[$], comp_byte[$], comp_clr[$], st_addr[$];
  int n_issue = 0;

  always #5 clk = ~clk;
  cluster_ctrl dut (.*);

  task automatic chk(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  task automatic bus_wr(input logic [31:0] a, input logic [63:0] d);
    @(negedge clk); req = '0; req.valid = 1; req.we = 1; req.addr = a; req.wdata = d; req.be = '1;
    #1; while (!rsp.ready) begin @(negedge clk); #1; end
    @(negedge clk); req = '0;
  endtask

  task automatic bus_rd(input logic [31:0] a, output logic [63:0] d);
    @(negedge clk); req = '0; req.valid = 1; req.addr = a;
    #1; while (!rsp.ready) begin @(negedge clk); #1; end
    @(negedge clk); req = '0; d = rsp.rdata;
    chk(rsp.rvalid, "rvalid one cycle after accept");
  endtask

  // monitor
  always @(posedge clk) if (rst_n) begin
    if (issue.rd) begin
      n_issue++;
      if (!stall) rd_addr.push_back(int'(issue.addr));
    end
    if (ex.kind == EX_COMP) begin comp_byte.push_back(int'(ex.lane.b_byte)); comp_clr.push_back(int'(ex.clr)); end
    if (ex.kind == EX_STORE) st_addr.push_back(int'(ex.waddr));
  end

  initial begin
    #100000 failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [63:0] prog [7], d;
    req = '0;
    prog[0] = i_setagu(AGU_A, 5, 1);
    prog[1] = i_setagu(AGU_W, 12'h400, 1);
    prog[2] = i_setlp(3);
    prog[3] = i_comp(PE_MAC, RA_MEM, RB_MCAST_BYTE, 0, 1'b1, 1'b1);
    prog[4] = i_setlp(2);
    prog[5] = i_store();
    prog[6] = i_halt();
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 7; i++) bus_wr(32'h1_0000 + 32'(8 * i), prog[i]);
    bus_rd(32'h1_0018, d);
    chk(d == prog[3], "instruction memory read back");
    bus_wr(32'h10, 64'd0);
    bus_wr(32'h00, 64'h3);          // start, irq enable
    // one stall on the second issue
    wait (n_issue == 2);
    @(negedge clk); stall = 1;
    @(negedge clk); stall = 0;
    wait (!busy);
    repeat (3) @(negedge clk);
    chk(rd_addr.size() == 3 && rd_addr[0] == 5 && rd_addr[1] == 6 && rd_addr[2] == 7, "AGU read sequence");
    chk(comp_byte.size() == 3 && comp_byte[0] == 0 && comp_byte[1] == 1 && comp_byte[2] == 2, "AIU byte select");
    chk(comp_clr.size() == 3 && comp_clr[0] == 1 && comp_clr[1] == 0 && comp_clr[2] == 0, "clear on first");
    chk(st_addr.size() == 2 && st_addr[0] == 12'h400 && st_addr[1] == 12'h401, "store addresses");
    chk(irq, "done interrupt");
    bus_rd(32'h08, d); chk(d[1:0] == 2'b10, "status done, not busy");
    bus_rd(32'h18, d); chk(d == 64'd20, $sformatf("cycle count %0d", d));
    bus_rd(32'h20, d); chk(d == 64'd1, "stall count");
    bus_wr(32'h08, 64'h2);
    chk(!irq, "done cleared");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
