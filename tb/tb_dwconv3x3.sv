// tb_dwconv3x3 - a depthwise 3x3 convolution layer (the MobileNet building
// block) on one full-size cluster (16 blocks x 8 PEs).
//
// An unsigned 8-bit feature map of 128 columns x 10 rows is spread so that
// PE i of block n holds column 8n+i; row r sits at word r of bank 0. The
// nine signed weights are in block 3, one word per kernel column dx. For
// each of 8 output rows the program multicasts kernel column dx, then runs
// a 3-iteration MAC over the kernel rows with the operand shifted right
// (dx = 0), unshifted (dx = 1) or shifted left (dx = 2). The AIU picks the
// weight byte. Shifted-in bytes cross block boundaries over the 8-bit
// daisy chain, and the two image edges get zero padding from the chain
// ends. ReLU, shift 6 and a STORE to bank 1 finish each row. The host
// reads back all 1024 outputs and compares them with a reference model.
// The MAC cycle count (8 rows x 3 x 3) and a stall-free run are checked.
module tb_dwconv3x3;
  import j3dai_pkg::*;
  import j3dai_asm_pkg::*;
  localparam int H = 10, OH = 8;
  int checks = 0, failures = 0, n_comp = 0;
  logic clk = 0, rst_n = 0, busy, irq;
  bus_req_t req;
  bus_rsp_t rsp;
  logic vert_req = 0, vert_we = 0, vert_blocked;
  logic [11:0] vert_addr = 0;
  logic [15:0][63:0] vert_wdata, vert_rdata;
  logic [7:0] img [H][128];
  logic signed [7:0] wk [3][3];

  always #5 clk = ~clk;
  neural_cluster dut (.*);

  always @(posedge clk) if (dut.ex.kind == EX_COMP) n_comp++;

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

  initial begin
    #5000000 failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [63:0] d, stl;
    logic [63:0] p [$];
    req = '0; vert_wdata = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < H; r++) for (int x = 0; x < 128; x++) img[r][x] = 8'($urandom);
    for (int dy = 0; dy < 3; dy++) for (int dx = 0; dx < 3; dx++) wk[dy][dx] = 8'($urandom_range(0, 60) - 30);
    for (int r = 0; r < H; r++)
      for (int n = 0; n < 16; n++) begin
        for (int i = 0; i < 8; i++) d[8*i +: 8] = img[r][8*n + i];
        bus_wr(l1(n, r), d);
      end
    for (int dx = 0; dx < 3; dx++) begin
      d = '0;
      for (int dy = 0; dy < 3; dy++) d[8*dy +: 8] = wk[dy][dx];
      bus_wr(l1(3, 12'hc00 + dx), d);
    end
    p = {i_setnl(NL_RELU, 6, 1'b0)};
    for (int y = 0; y < OH; y++) begin
      for (int dx = 0; dx < 3; dx++) begin
        p.push_back(i_setagu(AGU_M, 12'hc00 + dx, 0));
        p.push_back(i_mcast(3));
        p.push_back(i_setagu(AGU_A, y, 1));
        p.push_back(i_setlp(3));
        p.push_back(i_comp(PE_MAC, (dx == 0) ? RA_SHR : (dx == 1) ? RA_MEM : RA_SHL,
                           RB_MCAST_BYTE, 0, 1'b1, dx == 0, 1'b0, 1'b1, FILL_NEIGH));
      end
      p.push_back(i_setagu(AGU_W, 12'h400 + y, 0));
      p.push_back(i_store());
    end
    p.push_back(i_halt());
    foreach (p[i]) bus_wr(32'h1_0000 + 32'(8 * i), p[i]);
    bus_wr(32'h00, 64'h1);
    do bus_rd(32'h08, d); while (d[0]);
    bus_rd(32'h20, stl);
    chk(stl == 0, "no stalls");
    chk(n_comp == OH * 3 * 3, $sformatf("MAC cycles %0d", n_comp));
    for (int y = 0; y < OH; y++)
      for (int n = 0; n < 16; n++) begin
        bus_rd(l1(n, 12'h400 + y), d);
        for (int i = 0; i < 8; i++) begin
          int x, s, r;
          x = 8 * n + i;
          s = 0;
          for (int dy = 0; dy < 3; dy++)
            for (int dx = 0; dx < 3; dx++)
              if (x + dx - 1 >= 0 && x + dx - 1 < 128)
                s += int'(img[y + dy][x + dx - 1]) * int'(wk[dy][dx]);
          r = (s < 0) ? 0 : ((s + 32) >>> 6);
          if (r > 255) r = 255;
          chk(d[8*i +: 8] == 8'(r), $sformatf("out y%0d x%0d: %0d vs %0d", y, x, d[8*i +: 8], r));
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
