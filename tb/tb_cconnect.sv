// tb_cconnect - random local and vertical requests on a 4-bank column with
// small banks. Checks the blocked flags against the priority rule and all
// read data against a reference memory that only applies granted writes.
module tb_cconnect;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic loc_req, loc_hi, loc_we, vert_req, vert_we, loc_blocked, vert_blocked;
  logic [1:0] loc_bank, vert_bank, hi_bank;
  assign hi_bank = loc_bank;  // loc_hi requests give their bank on both ports
  logic [3:0] loc_addr, vert_addr;
  logic [63:0] loc_wdata, vert_wdata, loc_rdata, vert_rdata;
  logic [7:0] loc_be;
  logic [3:0] mem_en, mem_we;
  logic [3:0][7:0] mem_be;
  logic [3:0][3:0] mem_addr;
  logic [3:0][63:0] mem_wdata, mem_rdata;
  logic [63:0] refm [4][16];
  int n_conf = 0;

  always #5 clk = ~clk;
  cconnect #(.NBANKS(4), .AW(4), .DW(64)) dut (.*);
  for (genvar k = 0; k < 4; k++) begin : g_m
    mem_bank #(.WORDS(16), .DW(64)) u_m (.clk, .en(mem_en[k]), .we(mem_we[k]), .be(mem_be[k]),
      .addr(mem_addr[k]), .wdata(mem_wdata[k]), .rdata(mem_rdata[k]));
  end

  initial begin
    #2000000 failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic l_rd, v_rd;
    logic [63:0] l_exp, v_exp;
    {loc_req, vert_req, loc_hi, loc_we, vert_we} = '0;
    loc_be = '1;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // fill every word through the vertical port
    for (int k = 0; k < 4; k++)
      for (int w = 0; w < 16; w++) begin
        @(negedge clk); vert_req = 1; vert_we = 1; vert_bank = 2'(k); vert_addr = 4'(w);
        vert_wdata = {$urandom, $urandom}; refm[k][w] = vert_wdata;
      end
    @(negedge clk); vert_req = 0;
    l_rd = 0; v_rd = 0;
    for (int n = 0; n < 4000; n++) begin
      logic conf, eb_l, eb_v;
      @(negedge clk);
      // check data of the reads issued in the previous cycle
      if (l_rd) begin checks++; if (loc_rdata !== l_exp) failures++; end
      if (v_rd) begin checks++; if (vert_rdata !== v_exp) failures++; end
      loc_req = $urandom_range(0, 1); vert_req = $urandom_range(0, 1);
      loc_hi = loc_req && 1'($urandom_range(0, 1)); loc_we = $urandom_range(0, 1); vert_we = $urandom_range(0, 1);
      loc_bank = 2'($urandom); vert_bank = 2'($urandom);
      loc_addr = 4'($urandom); vert_addr = 4'($urandom);
      loc_wdata = {$urandom, $urandom}; vert_wdata = {$urandom, $urandom}; loc_be = 8'($urandom);
      #1;
      conf = loc_req && vert_req && loc_bank == vert_bank;
      if (conf) n_conf++;
      eb_l = conf && !loc_hi;
      eb_v = loc_req && loc_hi && loc_bank == vert_bank;
      checks += 2;
      if (loc_blocked !== eb_l) failures++;
      if (vert_blocked !== eb_v) failures++;
      // reference: vertical first (disjoint banks or the winner)
      l_rd = loc_req && !eb_l && !loc_we;
      v_rd = vert_req && !(conf && loc_hi) && !vert_we;
      if (l_rd) l_exp = refm[loc_bank][loc_addr];
      if (v_rd) v_exp = refm[vert_bank][vert_addr];
      if (vert_req && !(conf && loc_hi) && vert_we) refm[vert_bank][vert_addr] = vert_wdata;
      if (loc_req && !eb_l && loc_we)
        for (int b = 0; b < 8; b++)
          if (loc_be[b]) refm[loc_bank][loc_addr][8*b +: 8] = loc_wdata[8*b +: 8];
    end
    checks++; if (n_conf < 100) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
