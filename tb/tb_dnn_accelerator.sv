// tb_dnn_accelerator - the accelerator with two clusters, its L2 side
// replaced by a behavioural row memory (one-cycle read, as the real L2's
// vertical port).
//
// Checks: a DMPA multicast L2 -> both clusters (8 rows in 9 cycles, data
// read back through each cluster's L1 window), a broadcast write landing in
// both clusters, a DMPA copy cluster 1 -> L2, a one-instruction program
// started in both clusters by one broadcast write, and the interrupts
// (both clusters and the DMPA).
module tb_dnn_accelerator;
  import j3dai_pkg::*;
  import j3dai_asm_pkg::*;
  localparam int NC = 2, NN = 16, ROWS = 256;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  bus_req_t req;
  bus_rsp_t rsp;
  logic l2_req, l2_we, isp_valid = 0, isp_ready;
  logic [ROW_W-1:0] l2_row;
  logic [NN-1:0][63:0] l2_wdata, l2_rdata;
  logic [63:0] isp_data = '0;
  logic [NC-1:0] busy;
  logic [NC:0] irq;
  logic [NN-1:0][63:0] l2m [ROWS];

  always #5 clk = ~clk;
  dnn_accelerator #(.N_CLUSTERS(NC)) dut (.*);

  always_ff @(posedge clk)
    if (l2_req) begin
      if (l2_we) l2m[l2_row[7:0]] <= l2_wdata;
      else       l2_rdata <= l2m[l2_row[7:0]];
    end

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
  endtask
  localparam logic [31:0] DM = 32'(DMPA_SLOT << 20), BC = 32'(BCAST_SLOT << 20);
  function automatic logic [31:0] l1(int c, int n, int la);
    return 32'(c << 20) + 32'h8_0000 + 32'(n << 15) + 32'(la << 3);
  endfunction
  task automatic dmpa(input int src, input int dmask, input int srow, input int drow, input int n);
    logic [63:0] d;
    bus_wr(DM + 32'h08, 64'(srow));
    bus_wr(DM + 32'h10, 64'(drow));
    bus_wr(DM + 32'h18, 64'(n));
    bus_wr(DM + 32'h00, 64'(dmask << 8 | src << 4 | 3));
    do bus_rd(DM + 32'h20, d); while (d[0]);
  endtask

  initial begin
    #2000000 failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [63:0] d;
    req = '0; l2_rdata = '0;
    for (int r = 0; r < ROWS; r++) for (int n = 0; n < NN; n++) l2m[r][n] = {$urandom, $urandom};
    repeat (3) @(negedge clk);
    rst_n = 1;
    // L2 rows 4..11 -> both clusters at local row 0x10
    dmpa(0, 6, 4, 12'h10, 8);
    bus_rd(DM + 32'h28, d);
    chk(d == 64'd9, $sformatf("8 rows in %0d cycles", d));
    chk(irq[NC], "DMPA interrupt");
    for (int k = 0; k < 40; k++) begin
      int c, n, j;
      c = $urandom_range(0, NC - 1); n = $urandom_range(0, NN - 1); j = $urandom_range(0, 7);
      bus_rd(l1(c, n, 12'h10 + j), d);
      chk(d == l2m[4 + j][n], $sformatf("multicast c%0d n%0d row %0d", c, n, j));
    end
    // broadcast write, read back from each cluster
    bus_wr(BC + 32'h8_0000 + 32'(3 << 15) + 32'(12'h20 << 3), 64'h1234_5678_9abc_def0);
    for (int c = 0; c < NC; c++) begin
      bus_rd(l1(c, 3, 12'h20), d);
      chk(d == 64'h1234_5678_9abc_def0, $sformatf("broadcast c%0d", c));
    end
    // cluster 1 rows 0x10.. -> L2 rows 200..
    dmpa(2, 1, 12'h10, 200, 8);
    for (int j = 0; j < 8; j++)
      for (int n = 0; n < NN; n++) chk(l2m[200 + j][n] == l2m[4 + j][n], "copy back to L2");
    // one-instruction program, loaded and started by broadcast
    bus_wr(BC + 32'h1_0000, i_halt());
    bus_wr(BC + 32'h0, 64'h3);
    repeat (20) @(negedge clk);
    chk(busy == '0, "clusters finished");
    chk(irq[NC-1:0] == '1, "cluster interrupts");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
