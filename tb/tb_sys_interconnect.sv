// tb_sys_interconnect - two masters issue random transfers to all windows;
// behavioural slaves (each a small memory with random ready) answer one
// cycle after accepting. Checks decode, offset, arbitration (the CPU wins
// when both ask), routing of responses and the default slave.
module tb_sys_interconnect;
  import j3dai_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  bus_req_t [1:0] m_req;
  bus_rsp_t [1:0] m_rsp;
  bus_req_t [5:0] s_req;
  bus_rsp_t [5:0] s_rsp;
  logic [5:0] rdy;
  logic [63:0] mem [6][16];
  logic [31:0] bases [6] = '{ISRAM_BASE, DSRAM_BASE, L2_BASE, DNN_BASE, SREG_BASE, DMA_BASE};
  int both = 0;

  always #5 clk = ~clk;
  sys_interconnect dut (.*);

  for (genvar s = 0; s < 6; s++) begin : g_s
    logic v_q;
    logic [63:0] rd;
    always_ff @(posedge clk) begin
      v_q <= s_req[s].valid && rdy[s];
      if (s_req[s].valid && rdy[s]) begin
        if (s_req[s].we) mem[s][s_req[s].addr[6:3]] <= s_req[s].wdata;
        rd <= mem[s][s_req[s].addr[6:3]];
        if (s_req[s].addr[31:7] != 0) begin failures++; $display("FAIL offset"); end
      end
    end
    assign s_rsp[s].ready  = rdy[s];
    assign s_rsp[s].rvalid = v_q;
    assign s_rsp[s].rdata  = rd;
  end

  initial begin
    #3000000 failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // two masters with the same random traffic pattern, one word each per slave
  logic [63:0] model [6][16];
  initial begin
    m_req = '0; rdy = '1;
    for (int s = 0; s < 6; s++) for (int w = 0; w < 16; w++) begin mem[s][w] = 0; model[s][w] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 1500; n++) begin
      int s[2], w[2];
      bit done_m[2];
      @(negedge clk);
      rdy = 6'($urandom) | 6'($urandom);
      for (int m = 0; m < 2; m++) begin
        s[m] = $urandom_range(0, 5); w[m] = $urandom_range(0, 15);
        m_req[m] = '0;
        m_req[m].valid = $urandom_range(0, 1);
        m_req[m].we = $urandom_range(0, 1);
        m_req[m].addr = bases[s[m]] + 32'(w[m] * 8);
        m_req[m].wdata = {$urandom, $urandom};
        done_m[m] = !m_req[m].valid;
      end
      if (m_req[0].valid && m_req[1].valid) both++;
      // run until both are served
      while (!(done_m[0] && done_m[1])) begin
        #1;
        for (int m = 0; m < 2; m++)
          if (!done_m[m] && m_rsp[m].ready) begin
            logic [63:0] e;
            checks++;
            if (m == 1 && m_req[0].valid) failures++;   // CPU must win
            e = model[s[m]][w[m]];
            if (m_req[m].we) model[s[m]][w[m]] = m_req[m].wdata;
            @(negedge clk);
            checks++;
            if (!m_rsp[m].rvalid || (!m_req[m].we && m_rsp[m].rdata !== e)) begin
              failures++; if (failures < 5) $display("FAIL m%0d s%0d", m, s[m]);
            end
            m_req[m] = '0; done_m[m] = 1;
          end
        if (!(done_m[0] && done_m[1]) && !(m_rsp[0].ready || m_rsp[1].ready)) begin
          @(negedge clk); rdy = 6'($urandom) | 6'($urandom);
        end
      end
    end
    // default slave
    @(negedge clk); m_req[0] = '0; m_req[0].valid = 1; m_req[0].addr = 32'h0800_0000; #1;
    checks++; if (!m_rsp[0].ready) failures++;
    @(negedge clk); m_req[0] = '0; checks++; if (!m_rsp[0].rvalid || m_rsp[0].rdata != 0) failures++;
    checks++; if (both < 100) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
