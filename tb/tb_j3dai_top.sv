// tb_j3dai_top - end-to-end run of the whole system at its full size
// (6 clusters x 16 blocks x 8 PEs, 5 MB L2), the testbench acting as host
// CPU and as ISP.
//
// The host writes activations and weights into L2; the DMPA copies each
// cluster's activations (8 rows, timed: 9 cycles) and multicasts the weight
// row to all six clusters; one program is loaded and started in all
// clusters through the broadcast window. Each PE computes
// 4 x sum_j x[j] * w[j] (a 32-iteration MAC loop with AIU-selected weight
// bytes), ReLU and shift 9, and stores it, then runs a 400-cycle STORE loop.
// Meanwhile the ISP streams rows into bank 0 (the MAC loop must stall) and
// a 64-row multicast into bank 1 must wait behind the STORE loop; a host
// read of L2 must wait behind a DMPA row read. Results
// go back by DMPA to the middle-die L2 partition, the DMA copies them to the
// data SRAM, and the host checks them there. Each mechanism is counted and
// must occur: cluster stall, DMPA stall, DMPA multicast, ISP row, broadcast
// write, DMA copy, middle-partition access, bus wait on L2, interrupt, and
// cycles with all 768 PEs doing a MAC. Each cluster's CYCLES must equal
// 458 plus its STALLS.
module tb_j3dai_top;
  import j3dai_pkg::*;
  import j3dai_asm_pkg::*;
  localparam int NC = 6, NN = 16;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, isp_valid = 0, isp_ready, irq;
  logic [63:0] isp_data = 0;
  bus_req_t cpu_req;
  bus_rsp_t cpu_rsp;

  always #5 clk = ~clk;
  j3dai_top dut (.clk, .rst_n, .cpu_req, .cpu_rsp, .isp_valid, .isp_data, .isp_ready, .irq);

  // ---- mechanism counters ----
  int n_cl_stall = 0, n_dmpa_stall = 0, n_mcast = 0, n_isp_rows = 0, n_bcast = 0,
      n_dma = 0, n_mid = 0, n_l2_wait = 0, n_irq = 0, n_full_mac = 0;
  longint n_macs = 0;
  always @(posedge clk) if (rst_n) begin
    int comp;
    comp = 0;
    if (dut.u_dnn.g_cl[0].u_cluster.stall && dut.u_dnn.g_cl[0].u_cluster.issue.rd) n_cl_stall++;
    if (dut.u_dnn.u_dmpa.wr_req && !dut.u_dnn.u_dmpa.wr_ok) n_dmpa_stall++;
    if (dut.u_dnn.u_dmpa.do_wr && $countones(dut.u_dnn.u_dmpa.dst) > 1) n_mcast++;
    if (dut.u_dnn.u_dmpa.do_wr && dut.u_dnn.u_dmpa.src == 4'd15) n_isp_rows++;
    if (dut.u_dnn.u_lic.bcast && cpu_req.valid && cpu_rsp.ready && cpu_req.we) n_bcast++;
    if (dut.u_dma.st != 0) n_dma++;
    if (dut.u_l2.vert_req && dut.u_l2.v_part) n_mid++;
    if (dut.u_l2.req.valid && !dut.u_l2.rsp.ready) n_l2_wait++;
    if (irq) n_irq++;
    if (dut.u_dnn.g_cl[0].u_cluster.ex.kind == EX_COMP) comp++;
    if (dut.u_dnn.g_cl[1].u_cluster.ex.kind == EX_COMP) comp++;
    if (dut.u_dnn.g_cl[2].u_cluster.ex.kind == EX_COMP) comp++;
    if (dut.u_dnn.g_cl[3].u_cluster.ex.kind == EX_COMP) comp++;
    if (dut.u_dnn.g_cl[4].u_cluster.ex.kind == EX_COMP) comp++;
    if (dut.u_dnn.g_cl[5].u_cluster.ex.kind == EX_COMP) comp++;
    n_macs += comp * NN * 8;
    if (comp == NC) n_full_mac++;
  end

  task automatic chk(input bit c, input string m);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL %s", m); end
  endtask

  task automatic bus_wr(input logic [31:0] a, input logic [63:0] d);
    @(negedge clk); cpu_req = '0; cpu_req.valid = 1; cpu_req.we = 1; cpu_req.addr = a;
    cpu_req.wdata = d; cpu_req.be = '1;
    #1; while (!cpu_rsp.ready) begin @(negedge clk); #1; end
    @(negedge clk); cpu_req = '0;
  endtask

  task automatic bus_rd(input logic [31:0] a, output logic [63:0] d);
    @(negedge clk); cpu_req = '0; cpu_req.valid = 1; cpu_req.addr = a;
    #1; while (!cpu_rsp.ready) begin @(negedge clk); #1; end
    @(negedge clk); cpu_req = '0; d = cpu_rsp.rdata;
  endtask

  localparam logic [31:0] DMPA = DNN_BASE + 32'(DMPA_SLOT << 20);
  localparam logic [31:0] BC   = DNN_BASE + 32'(BCAST_SLOT << 20);

  function automatic logic [31:0] l2w(int row, int col);
    return L2_BASE + 32'((row * 16 + col) * 8);
  endfunction
  function automatic logic [31:0] l1(int c, int n, int laddr);
    return DNN_BASE + 32'(c << 20) + 32'h8_0000 + 32'(n << 15) + 32'(laddr << 3);
  endfunction

  task automatic dmpa_start(input int src, input int dmask, input int srow, input int drow, input int n);
    bus_wr(DMPA + 32'h08, 64'(srow));
    bus_wr(DMPA + 32'h10, 64'(drow));
    bus_wr(DMPA + 32'h18, 64'(n));
    bus_wr(DMPA + 32'h00, 64'(dmask << 8 | src << 4 | 1));
  endtask
  task automatic dmpa_wait();
    logic [63:0] d;
    do bus_rd(DMPA + 32'h20, d); while (d[0]);
  endtask

  initial begin
    #20000000 failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic [7:0][7:0] x [NC][NN][8];
  logic [7:0][7:0] w;
  logic [63:0] bank1_rows [64][NN];

  initial begin
    logic [63:0] d, cyc, stl;
    logic [63:0] p [$];
    cpu_req = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // ---- data into L2: cluster c activations in rows 8c..8c+7, weights in row 48 ----
    for (int c = 0; c < NC; c++)
      for (int j = 0; j < 8; j++)
        for (int n = 0; n < NN; n++) begin
          x[c][n][j] = {$urandom, $urandom};
          bus_wr(l2w(8 * c + j, n), x[c][n][j]);
        end
    w = {$urandom, $urandom};
    bus_wr(l2w(48, 3), w);
    for (int r = 0; r < 64; r++)
      for (int n = 0; n < NN; n++) begin
        bank1_rows[r][n] = {$urandom, $urandom};
        bus_wr(l2w(100 + r, n), bank1_rows[r][n]);
      end
    // ---- DMPA: activations per cluster, weights to all ----
    for (int c = 0; c < NC; c++) begin
      dmpa_start(0, 1 << (c + 1), 8 * c, 0, 8);
      if (c == 0) begin                        // host read of L2 against DMPA reads
        bus_rd(l2w(48, 3), d);
        chk(d == w, "host L2 read during a transfer");
      end
      dmpa_wait();
      bus_rd(DMPA + 32'h28, d);
      chk(d == 64'd9, $sformatf("8 rows in 9 cycles (%0d)", d));
    end
    dmpa_start(0, 8'h7e, 48, 12'hc00, 1);
    dmpa_wait();
    $display("[%0t] data in L1", $time);
    // ---- program, loaded once through the broadcast window ----
    p = {i_setagu(AGU_M, 12'hc00, 0), i_mcast(3),
         i_setagu(AGU_A, 0, 1, 0), i_setlp(8, 4),
         i_comp(PE_MAC, RA_MEM, RB_MCAST_BYTE, 0, 1'b1, 1'b1, 1'b0, 1'b1),
         i_setnl(NL_RELU, 9, 1'b0), i_setagu(AGU_W, 12'h400, 0), i_store(),
         i_setagu(AGU_W, 12'h500, 1), i_setlp(400), i_store(), i_halt()};
    foreach (p[i]) bus_wr(BC + 32'h1_0000 + 32'(8 * i), p[i]);
    $display("[%0t] program loaded", $time);
    bus_wr(SREG_BASE + 32'h18, 64'hff);        // unmask all interrupts
    // ISP: 8 rows into bank 0 rows 0x100.. of cluster 0, running during the MAC loop
    dmpa_start(15, 2, 0, 12'h100, 8);
    fork
      begin
        for (int b = 0; b < 128; b++) begin
          @(negedge clk); isp_valid = 1; isp_data = 64'(b) * 64'h0101_0101_0101_0101;
          #1; while (!isp_ready) begin @(negedge clk); #1; end
          @(posedge clk);
        end
        @(negedge clk); isp_valid = 0;
      end
      begin
        repeat (20) @(negedge clk);
        bus_wr(BC + 32'h00, 64'h3);            // start all clusters
      end
    join
    $display("[%0t] clusters started", $time);
    dmpa_wait();
    $display("[%0t] isp done", $time);
    // 64-row multicast into bank 1 while the STORE loop runs
    dmpa_start(0, 8'h7e, 100, 12'h700, 64);
    dmpa_wait();
    $display("[%0t] multicast done", $time);
    // wait for every cluster
    for (int c = 0; c < NC; c++) begin
      do bus_rd(DNN_BASE + 32'(c << 20) + 32'h08, d); while (d[0]);
      bus_rd(DNN_BASE + 32'(c << 20) + 32'h18, cyc);
      bus_rd(DNN_BASE + 32'(c << 20) + 32'h20, stl);
      chk(cyc == 64'd458 + stl, $sformatf("cluster %0d cycles %0d stalls %0d", c, cyc, stl));
    end
    chk(irq, "interrupt to host");
    bus_rd(SREG_BASE + 32'h10, d);
    chk(d[5:0] == 6'h3f, "all cluster interrupts pending");
    // results: cluster c local 0x400 -> L2 middle partition row 24576 + c
    for (int c = 0; c < NC; c++) begin
      dmpa_start(c + 1, 1, 12'h400, 24576 + c, 1);
      dmpa_wait();
    end
    // DMA: L2 rows 24576.. (96 words) -> data SRAM
    bus_wr(DMA_BASE + 32'h00, 64'(l2w(24576, 0)));
    bus_wr(DMA_BASE + 32'h08, 64'(DSRAM_BASE));
    bus_wr(DMA_BASE + 32'h10, 64'd96);
    bus_wr(DMA_BASE + 32'h18, 64'h1);
    do bus_rd(DMA_BASE + 32'h20, d); while (d[0]);
    for (int c = 0; c < NC; c++)
      for (int n = 0; n < NN; n++) begin
        bus_rd(DSRAM_BASE + 32'((c * 16 + n) * 8), d);
        for (int i = 0; i < 8; i++) begin
          int s, r;
          s = 0;
          for (int j = 0; j < 8; j++) s += int'(x[c][n][j][i]) * int'($signed(w[j]));
          s = 4 * s;
          r = (s < 0) ? 0 : ((s + 256) >>> 9);
          if (r > 255) r = 255;
          chk(d[8*i +: 8] == 8'(r), $sformatf("result c%0d n%0d pe%0d %0d vs %0d", c, n, i, d[8*i +: 8], r));
        end
      end
    // bank-1 multicast landed in every cluster despite the STORE loop
    for (int c = 0; c < NC; c++) begin
      bus_rd(l1(c, 5, 12'h700 + 17), d);
      chk(d == bank1_rows[17][5], $sformatf("bank1 multicast c%0d", c));
    end
    // ISP rows in cluster 0
    bus_rd(l1(0, 2, 12'h103), d);
    chk(d == 64'(3 * 16 + 2) * 64'h0101_0101_0101_0101, "isp row in L1");
    chk(n_macs == longint'(NC) * NN * 8 * 32, $sformatf("MAC count %0d", n_macs));
    $display("mechanisms: cl_stall=%0d dmpa_stall=%0d mcast_rows=%0d isp_rows=%0d bcast=%0d dma=%0d mid=%0d l2_wait=%0d irq=%0d full768=%0d",
             n_cl_stall, n_dmpa_stall, n_mcast, n_isp_rows, n_bcast, n_dma, n_mid, n_l2_wait, n_irq, n_full_mac);
    chk(n_cl_stall > 0, "cluster stall happened");
    chk(n_dmpa_stall > 0, "DMPA stall happened");
    chk(n_mcast > 0, "DMPA multicast happened");
    chk(n_isp_rows == 8, "ISP rows");
    chk(n_bcast > 0, "broadcast write happened");
    chk(n_dma > 0, "DMA ran");
    chk(n_mid > 0, "middle L2 partition used");
    chk(n_l2_wait > 0, "bus waited on L2");
    chk(n_irq > 0, "interrupt seen");
    chk(n_full_mac > 0, "768 MACs in one cycle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
