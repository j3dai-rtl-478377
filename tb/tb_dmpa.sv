// tb_dmpa - the DMPA with two clusters and behavioural row memories around
// it. Checks: an L2 -> both clusters multicast of 20 rows at one row per
// cycle (CYCLES = rows + 1), a cluster -> L2 copy while the testbench
// randomly holds the cluster's banks (data intact, STALLS counted), and an
// ISP stream of 16-beat rows written into a cluster. Memory contents are
// compared row by row with what was sent.
module tb_dmpa;
  import j3dai_pkg::*;
  localparam int NC = 2;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  bus_req_t req;
  bus_rsp_t rsp;
  logic l2_req, l2_we, isp_valid = 0, isp_ready, irq;
  logic [15:0] l2_row;
  row_t wdata, l2_rdata;
  logic [NC-1:0] cl_req, cl_we, cl_blocked;
  logic [NC-1:0][11:0] cl_addr;
  logic [NC-1:0][15:0][63:0] cl_rdata;
  logic [63:0] isp_data;
  row_t l2m [64];
  row_t clm [NC][64];
  bit rand_block = 0;

  always #5 clk = ~clk;
  dmpa #(.N_CLUSTERS(NC), .N_COL(16)) dut (.*);

  // behavioural memories
  always_ff @(posedge clk) begin
    if (l2_req) begin
      if (l2_we) l2m[l2_row[5:0]] <= wdata;
      else       l2_rdata <= l2m[l2_row[5:0]];
    end
    for (int c = 0; c < NC; c++)
      if (cl_req[c] && !cl_blocked[c]) begin
        if (cl_we[c]) clm[c][cl_addr[c][5:0]] <= wdata;
        else          cl_rdata[c] <= clm[c][cl_addr[c][5:0]];
      end
  end
  always @(negedge clk) cl_blocked <= rand_block ? NC'($urandom) : '0;

  task automatic chk(input bit c, input string m);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s", m); end
  endtask

  task automatic bus_wr(input logic [31:0] a, input logic [63:0] d);
    @(negedge clk); req = '0; req.valid = 1; req.we = 1; req.addr = a; req.wdata = d; req.be = '1;
    @(negedge clk); req = '0;
  endtask

  task automatic bus_rd(input logic [31:0] a, output logic [63:0] d);
    @(negedge clk); req = '0; req.valid = 1; req.addr = a;
    @(negedge clk); req = '0; d = rsp.rdata;
  endtask

  task automatic xfer(input int src, input int dmask, input int srow, input int drow, input int n);
    logic [63:0] d;
    bus_wr(32'h08, 64'(srow));
    bus_wr(32'h10, 64'(drow));
    bus_wr(32'h18, 64'(n));
    bus_wr(32'h00, 64'(dmask << 8 | src << 4 | 3));
    do bus_rd(32'h20, d); while (d[0]);
  endtask

  initial begin
    #2000000 failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [63:0] d;
    req = '0; cl_blocked = '0;
    for (int r = 0; r < 64; r++) begin
      for (int k = 0; k < 16; k++) l2m[r][k] = {$urandom, $urandom};
      clm[0][r] = '0; clm[1][r] = '0;
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    // L2 rows 4..23 -> clusters 0 and 1, rows 30..49
    xfer(0, 6, 4, 30, 20);
    for (int r = 0; r < 20; r++) begin
      chk(clm[0][30 + r] == l2m[4 + r], $sformatf("multicast c0 row %0d", r));
      chk(clm[1][30 + r] == l2m[4 + r], $sformatf("multicast c1 row %0d", r));
    end
    bus_rd(32'h28, d); chk(d == 64'd21, $sformatf("20 rows in 21 cycles (%0d)", d));
    chk(irq, "irq on done");
    bus_wr(32'h20, 64'h2);
    chk(!irq, "done cleared");
    // cluster 0 rows 30..49 -> L2 rows 40..59 with random bank holds
    rand_block = 1;
    xfer(1, 1, 30, 40, 20);
    rand_block = 0;
    for (int r = 0; r < 20; r++) chk(l2m[40 + r] == clm[0][30 + r], $sformatf("c0->L2 row %0d", r));
    bus_rd(32'h30, d); chk(d != 0, "stalls counted");
    // ISP stream: 4 rows of 16 beats into cluster 1 rows 0..3
    begin
      logic [63:0] beats [64];
      logic [63:0] cfgw;
      for (int b = 0; b < 64; b++) beats[b] = {$urandom, $urandom};
      bus_wr(32'h08, 64'd0); bus_wr(32'h10, 64'd0); bus_wr(32'h18, 64'd4);
      cfgw = 64'(4 << 8 | 15 << 4 | 1);
      bus_wr(32'h00, cfgw);
      for (int b = 0; b < 64; b++) begin
        @(negedge clk); isp_valid = 1; isp_data = beats[b];
        @(posedge clk); while (!isp_ready) @(posedge clk);
      end
      @(negedge clk); isp_valid = 0;
      do bus_rd(32'h20, d); while (d[0]);
      for (int r = 0; r < 4; r++)
        for (int k = 0; k < 16; k++)
          chk(clm[1][r][k] == beats[16 * r + k], $sformatf("isp row %0d beat %0d", r, k));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
