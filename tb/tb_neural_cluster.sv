// tb_neural_cluster - a full 16-block cluster runs a dot-product layer:
// 128 PEs each take 8 unsigned activations from bank 0 of their block and 8
// signed weights multicast from block 3 (AIU picks the weight byte), then
// ReLU + shift 7 and a STORE to bank 1. While the MAC loop runs, vertical
// writes hit bank 0, so the program must stall and still be right. Then a
// second program mixes two blocks into the multicast register and moves
// accumulators one PE left over the 32-bit path. All results are read back
// by the host and compared with values computed here.
module tb_neural_cluster;
  import j3dai_pkg::*;
  import j3dai_asm_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, busy, irq;
  bus_req_t req;
  bus_rsp_t rsp;
  logic vert_req = 0, vert_we = 0, vert_blocked;
  logic [11:0] vert_addr = 0;
  logic [15:0][63:0] vert_wdata, vert_rdata;
  logic [7:0][7:0] x [16][8];
  logic [7:0][7:0] w;

  always #5 clk = ~clk;
  neural_cluster dut (.*);

  task automatic chk(input bit c, input string m);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s", m); end
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
  endtask

  function automatic logic [31:0] l1(int n, int laddr);
    return 32'h8_0000 + 32'(n << 15) + 32'(laddr << 3);
  endfunction

  task automatic load_prog(input logic [63:0] p [$]);
    foreach (p[i]) bus_wr(32'h1_0000 + 32'(8 * i), p[i]);
  endtask

  task automatic run();
    logic [63:0] d;
    bus_wr(32'h00, 64'h3);
    do bus_rd(32'h08, d); while (d[0]);
  endtask

  initial begin
    #5000000 failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [63:0] d, stalls;
    logic [63:0] p [$];
    int dot [16][8];
    req = '0; vert_wdata = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 16; n++)
      for (int j = 0; j < 8; j++) begin
        x[n][j] = {$urandom, $urandom};
        bus_wr(l1(n, j), x[n][j]);
      end
    w = {$urandom, $urandom};
    bus_wr(l1(3, 12'hc00), w);

    p = {i_setagu(AGU_M, 12'hc00, 0), i_mcast(3),
         i_setagu(AGU_A, 0, 1), i_setlp(8),
         i_comp(PE_MAC, RA_MEM, RB_MCAST_BYTE, 0, 1'b1, 1'b1, 1'b0, 1'b1),
         i_setnl(NL_RELU, 7, 1'b0), i_setagu(AGU_W, 12'h400, 0), i_store(), i_halt()};
    load_prog(p);
    bus_wr(32'h00, 64'h3);
    // vertical writes into bank 0 (words 0x100+) while the MAC loop runs
    repeat (12) @(negedge clk);
    vert_req = 1; vert_we = 1; vert_addr = 12'h100;
    repeat (3) @(negedge clk);
    vert_req = 0; vert_we = 0;
    do bus_rd(32'h08, d); while (d[0]);
    chk(irq, "done interrupt");
    bus_rd(32'h20, stalls);
    chk(stalls != 0, "program stalled behind the vertical transfer");
    for (int n = 0; n < 16; n++) begin
      bus_rd(l1(n, 12'h400), d);
      for (int i = 0; i < 8; i++) begin
        int s, r;
        s = 0;
        for (int j = 0; j < 8; j++) s += int'(x[n][j][i]) * int'($signed(w[j]));
        dot[n][i] = s;
        r = (s < 0) ? 0 : ((s + 64) >>> 7);
        if (r > 255) r = 255;
        chk(d[8*i +: 8] == 8'(r), $sformatf("ncb %0d pe %0d: %0d vs %0d", n, i, d[8*i +: 8], r));
      end
    end

    // second program: mixed multicast (bytes 0-3 from block 5, 4-7 from block 9),
    // lane-wise weights, then each PE takes its right neighbour's accumulator
    bus_wr(l1(5, 12'hc01), {$urandom, $urandom});
    bus_wr(l1(9, 12'hc01), {$urandom, $urandom});
    p = {i_setagu(AGU_M, 12'hc01, 0), i_mcast(5, 9, 8'hf0),
         i_setagu(AGU_A, 2, 0), i_setlp(1),
         i_comp(PE_MUL, RA_MEM, RB_MCAST_LANE, 0, 1'b0, 1'b0, 1'b0, 1'b0),
         i_comp(PE_LDACC), i_setnl(NL_LINEAR, 8, 1'b0),
         i_setagu(AGU_W, 12'h401, 0), i_store(), i_halt()};
    load_prog(p);
    run();
    begin
      logic [63:0] m5, m9;
      logic [7:0][7:0] mix;
      logic [7:0] e;
      bus_rd(l1(5, 12'hc01), m5);
      bus_rd(l1(9, 12'hc01), m9);
      mix = {m9[63:32], m5[31:0]};
      for (int n = 0; n < 16; n++) begin
        bus_rd(l1(n, 12'h401), d);
        for (int i = 0; i < 8; i++) begin
          int s, nn, ii;
          nn = (i == 7) ? n + 1 : n;
          ii = (i == 7) ? 0 : i + 1;
          s = (nn == 16) ? 0 : int'(x[nn][2][ii]) * int'(mix[ii]);
          e = ((s + 128) >> 8 > 255) ? 8'hff : 8'((s + 128) >> 8);
          chk(d[8*i +: 8] == e, $sformatf("shift ncb %0d pe %0d", n, i));
        end
      end
    end

    // vertical port: write a row, read it back by the host and vertically
    for (int n = 0; n < 16; n++) vert_wdata[n] = {$urandom, $urandom};
    @(negedge clk); vert_req = 1; vert_we = 1; vert_addr = 12'h805;
    @(negedge clk); vert_we = 0;
    @(negedge clk); vert_req = 0;
    for (int n = 0; n < 16; n++) chk(vert_rdata[n] == vert_wdata[n], "vertical row read");
    bus_rd(l1(7, 12'h805), d);
    chk(d == vert_wdata[7], "vertical row write seen by host");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
