// tb_local_interconnect - decode of the cluster and DMPA slots, offsets,
// response routing and the broadcast write window, with behavioural slaves
// (small register files; cluster 1 is not ready for a while).
module tb_local_interconnect;
  import j3dai_pkg::*;
  localparam int NC = 3;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  bus_req_t req, dm_req;
  bus_rsp_t rsp, dm_rsp;
  bus_req_t [NC-1:0] cl_req;
  bus_rsp_t [NC-1:0] cl_rsp;
  logic [63:0] regs [NC+1][8];
  logic [NC:0] rdy;

  always #5 clk = ~clk;
  local_interconnect #(.N_CLUSTERS(NC)) dut (.*);

  for (genvar s = 0; s <= NC; s++) begin : g_s
    bus_req_t r;
    logic v_q;
    logic [63:0] rd;
    assign r = (s == NC) ? dm_req : cl_req[s];
    always_ff @(posedge clk) begin
      v_q <= r.valid && rdy[s];
      if (r.valid && rdy[s]) begin
        if (r.we) regs[s][r.addr[5:3]] <= r.wdata;
        rd <= regs[s][r.addr[5:3]];
      end
    end
    if (s == NC) begin : g_d
      assign dm_rsp = '{ready: rdy[s], rvalid: v_q, rdata: rd};
    end else begin : g_c
      assign cl_rsp[s] = '{ready: rdy[s], rvalid: v_q, rdata: rd};
    end
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
    @(negedge clk); req = '0; d = rsp.rdata; chk(rsp.rvalid, "rvalid");
  endtask

  initial begin
    #100000 failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [63:0] d;
    req = '0; rdy = '1;
    for (int s = 0; s <= NC; s++) for (int k = 0; k < 8; k++) regs[s][k] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < NC; c++) bus_wr(32'(c << 20) + 32'h18, 64'(100 + c));
    bus_wr(32'(DMPA_SLOT << 20) + 32'h18, 64'd77);
    for (int c = 0; c < NC; c++) begin bus_rd(32'(c << 20) + 32'h18, d); chk(d == 64'(100 + c), "cluster slot"); end
    bus_rd(32'(DMPA_SLOT << 20) + 32'h18, d); chk(d == 64'd77, "dmpa slot");
    // broadcast while cluster 1 is not ready
    rdy[1] = 0;
    fork
      bus_wr(32'(BCAST_SLOT << 20) + 32'h20, 64'hbeef);
      begin repeat (4) @(negedge clk); chk(req.valid && !rsp.ready, "broadcast waits"); rdy[1] = 1; end
    join
    for (int c = 0; c < NC; c++) begin bus_rd(32'(c << 20) + 32'h20, d); chk(d == 64'hbeef, "broadcast reached"); end
    bus_rd(32'(DMPA_SLOT << 20) + 32'h20, d); chk(d == 0, "broadcast skips dmpa");
    bus_rd(32'(BCAST_SLOT << 20) + 32'h18, d); chk(d == 64'd100, "broadcast read = cluster 0");
    bus_rd(32'(12 << 20), d); chk(d == 0, "empty slot answers zero");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
