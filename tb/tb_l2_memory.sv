// tb_l2_memory - small L2 (48 bottom + 32 middle rows): bus writes of every
// word, vertical row reads of both partitions, vertical row writes read back
// over the bus, and a bus access that must wait while the vertical port
// uses its partition. Reference contents are kept in the testbench.
module tb_l2_memory;
  import j3dai_pkg::*;
  localparam int BOT = 48, MID = 32, ROWS = BOT + MID;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  bus_req_t req;
  bus_rsp_t rsp;
  logic vert_req = 0, vert_we = 0;
  logic [15:0] vert_row = 0;
  logic [15:0][63:0] vert_wdata, vert_rdata;
  logic [63:0] refm [ROWS*16];

  always #5 clk = ~clk;
  l2_memory #(.BOT_ROWS(BOT), .MID_ROWS(MID)) dut (.*);

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

  initial begin
    #2000000 failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [63:0] d;
    req = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int w = 0; w < ROWS * 16; w++) begin
      refm[w] = {$urandom, $urandom};
      bus_wr(32'(w * 8), refm[w]);
    end
    // vertical reads of rows on both sides of the partition boundary
    for (int r = BOT - 3; r < BOT + 3; r++) begin
      @(negedge clk); vert_req = 1; vert_we = 0; vert_row = 16'(r);
      @(negedge clk); vert_req = 0;
      for (int c = 0; c < 16; c++) chk(vert_rdata[c] == refm[r * 16 + c], $sformatf("vrow %0d col %0d", r, c));
    end
    // vertical writes, read back over the bus
    for (int r = 0; r < ROWS; r += 7) begin
      @(negedge clk); vert_req = 1; vert_we = 1; vert_row = 16'(r);
      for (int c = 0; c < 16; c++) begin vert_wdata[c] = {$urandom, $urandom}; refm[r * 16 + c] = vert_wdata[c]; end
    end
    @(negedge clk); vert_req = 0; vert_we = 0;
    for (int w = 0; w < ROWS * 16; w += 5) begin
      bus_rd(32'(w * 8), d);
      chk(d == refm[w], $sformatf("bus word %0d", w));
    end
    // the bus waits while the vertical port holds the partition
    @(negedge clk); vert_req = 1; vert_row = 16'd2;
    req = '0; req.valid = 1; req.addr = 32'h8;
    #1 chk(!rsp.ready, "bus waits for vertical");
    req.addr = 32'(BOT * 128); #1 chk(rsp.ready, "other partition free");
    @(negedge clk); vert_req = 0; req = '0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
