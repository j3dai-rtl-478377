// tb_ncb - one computing block driven as the cluster controller would:
// host writes of the banks, a pipelined 8-step MAC against a multicast word,
// a STORE through the non-linear unit read back by the host, a shifted load
// using the daisy-chain byte, vertical writes and reads, and both conflict
// flags. Expected values are computed in the testbench.
module tb_ncb;
  import j3dai_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  issue_t issue;
  ex_t ex;
  nl_cfg_t nl_cfg;
  logic [63:0] mcast, rd_word, host_wdata, host_rdata, vert_wdata, vert_rdata;
  logic issue_blocked, host_req, host_we, host_blocked, vert_req, vert_we, vert_blocked;
  logic [7:0] left_byte, right_byte, edge_lo, edge_hi, host_be;
  logic [31:0] right_acc, acc0;
  logic [11:0] host_addr, vert_addr;
  logic [7:0][7:0] x [8];
  logic [7:0][7:0] w;

  always #5 clk = ~clk;
  ncb dut (.*);

  task automatic chk(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  task automatic host_wr(input logic [11:0] a, input logic [63:0] d);
    @(negedge clk); host_req = 1; host_we = 1; host_addr = a; host_wdata = d;
    @(negedge clk); host_req = 0; host_we = 0;
  endtask

  task automatic host_rd(input logic [11:0] a, output logic [63:0] d);
    @(negedge clk); host_req = 1; host_we = 0; host_addr = a;
    @(negedge clk); host_req = 0; d = host_rdata;
  endtask

  initial begin
    #1000000 failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [63:0] d;
    issue = '0; ex = '0; host_req = 0; host_we = 0; host_be = '1; vert_req = 0; vert_we = 0;
    left_byte = 8'h11; right_byte = 8'h99; right_acc = 32'd0; mcast = '0;
    nl_cfg = '{mode: NL_RELU, shift: 5'd6, out_signed: 1'b0};
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int j = 0; j < 8; j++) begin
      x[j] = {$urandom, $urandom};
      host_wr(12'(j), x[j]);
    end
    w = {$urandom, $urandom};
    mcast = w;
    // MAC pipeline: issue read j, execute it next cycle with weight byte j
    for (int j = 0; j <= 8; j++) begin
      @(negedge clk);
      issue.rd = (j < 8); issue.addr = 12'(j);
      ex = '0;
      if (j > 0) begin
        ex.kind = EX_COMP;
        ex.lane = '{op: PE_MAC, a_sel: RA_MEM, fill: FILL_ZERO, a_byte: 3'd0,
                    b_sel: RB_MCAST_BYTE, b_byte: 3'(j-1), a_signed: 1'b1, b_signed: 1'b0};
        ex.clr = (j == 1);
      end
    end
    @(negedge clk); issue = '0;
    ex = '0; ex.kind = EX_STORE; ex.waddr = 12'h400;   // bank 1 word 0
    @(negedge clk); ex = '0;
    host_rd(12'h400, d);
    for (int i = 0; i < 8; i++) begin
      int s, r;
      s = 0;
      for (int j = 0; j < 8; j++) s += int'($signed(x[j][i])) * int'(w[j]);
      r = (s < 0) ? 0 : ((s + 32) >>> 6);
      if (r > 255) r = 255;
      chk(d[8*i +: 8] == 8'(r), $sformatf("mac lane %0d got %0d exp %0d", i, d[8*i +: 8], r));
    end
    // shift left with the neighbour byte, load into acc, store linear
    nl_cfg = '{mode: NL_LINEAR, shift: 5'd0, out_signed: 1'b0};
    @(negedge clk); issue.rd = 1; issue.addr = 12'd2;
    @(negedge clk); issue = '0; ex = '0; ex.kind = EX_COMP;
    ex.lane = '{op: PE_LDA, a_sel: RA_SHL, fill: FILL_NEIGH, a_byte: 3'd0,
                b_sel: RB_MCAST_BYTE, b_byte: 3'd0, a_signed: 1'b0, b_signed: 1'b0};
    chk(edge_lo == x[2][0] && edge_hi == x[2][7], "edge bytes");
    @(negedge clk); ex = '0; ex.kind = EX_STORE; ex.waddr = 12'h401;
    @(negedge clk); ex = '0;
    host_rd(12'h401, d);
    chk(d == {8'h99, x[2][7:1]}, "shift-left with neighbour byte");
    // vertical write then host read, vertical read
    @(negedge clk); vert_req = 1; vert_we = 1; vert_addr = 12'h805; vert_wdata = 64'hfeed_f00d_1234_5678;
    @(negedge clk); vert_we = 0; vert_addr = 12'd3;
    @(negedge clk); vert_req = 0;
    chk(vert_rdata == x[3], "vertical read");
    host_rd(12'h805, d);
    chk(d == 64'hfeed_f00d_1234_5678, "vertical write");
    // conflicts
    @(negedge clk); issue.rd = 1; issue.addr = 12'h806; vert_req = 1; vert_addr = 12'h807; #1;
    chk(issue_blocked && !vert_blocked, "issue read yields to vertical");
    issue.addr = 12'h006; #1;
    chk(!issue_blocked, "different banks proceed");
    issue = '0; ex.kind = EX_STORE; ex.waddr = 12'hc00; vert_addr = 12'hc01; #1;
    chk(vert_blocked, "vertical yields to write-back");
    chk(host_blocked, "host waits while program uses the block");
    @(negedge clk); ex = '0; vert_req = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
